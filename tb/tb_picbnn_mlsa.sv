// tb_picbnn_mlsa: self-checking test of the sense-amplifier model.
// Applies random mismatch counts (with many exactly at, just above and just
// below the threshold), random thresholds and row enables; checks that the
// registered output is 1 exactly for enabled rows whose count does not exceed
// the threshold, that it only changes when sense is enabled, and that
// act_valid follows sense by one clock edge.
module tb_picbnn_mlsa;
  import picbnn_pkg::*;
  localparam int unsigned NROWS = 256, LCW = 12;
  logic clk = 0, rst_n = 0, sen, act_valid;
  logic [HD_W-1:0] tol;
  logic [LCW-1:0] row_cnt [NROWS];
  logic [NROWS-1:0] row_en, act, exp_act;
  int checks = 0, failures = 0;

  picbnn_mlsa #(.NROWS(NROWS), .LCW(LCW)) dut (
    .clk, .rst_n, .sen, .tol, .row_cnt, .row_en, .act, .act_valid);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int tv, cv;
    sen = 0; tol = '0; row_en = '0;
    for (int r = 0; r < NROWS; r++) row_cnt[r] = '0;
    repeat (2) @(negedge clk);
    check(act == '0 && !act_valid, "reset");
    rst_n = 1;
    exp_act = '0;
    for (int t = 0; t < 200; t++) begin
      sen = ($urandom_range(0, 3) != 0);
      tv = $urandom_range(0, 2048);
      tol = HD_W'(tv);
      for (int r = 0; r < NROWS; r++) begin
        case ($urandom_range(0, 3))
          0: cv = tv;
          1: cv = tv + 1;
          2: cv = (tv > 0) ? tv - 1 : 0;
          default: cv = $urandom_range(0, 2048);
        endcase
        row_cnt[r] = LCW'(cv);
        row_en[r] = ($urandom_range(0, 7) != 0);
      end
      if (sen)
        for (int r = 0; r < NROWS; r++)
          exp_act[r] = row_en[r] && (int'(row_cnt[r]) <= tv);
      @(negedge clk);
      check(act_valid == sen, "act_valid timing");
      check(act == exp_act, "sense decision");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
