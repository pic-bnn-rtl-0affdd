// tb_picbnn_bank: self-checking test of one 64 x 512 bank.
// Fills the bank with random rows (and a few rows at a known Hamming distance
// from the later query), reads them back, and checks that each row's matchline
// count equals the Hamming distance between query and stored row, computed by
// the testbench from its own copy of the contents. A search's counts are
// checked in the cycle after the query is loaded.
module tb_picbnn_bank;
  localparam int unsigned ROWS = 64, COLS = 512, AW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS + 1);
  logic clk = 0, rst_n = 0, we, re, rvalid, s_load;
  logic [AW-1:0] addr;
  logic [COLS-1:0] wdata, rdata, s_query, q;
  logic [CW-1:0] ml_cnt [ROWS];
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  picbnn_bank #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .we, .re, .addr, .wdata, .rdata, .rvalid, .s_load, .s_query, .ml_cnt);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic write_row(input int r, input logic [COLS-1:0] d);
    @(negedge clk); we = 1; addr = AW'(r); wdata = d; shadow[r] = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    we = 0; re = 0; s_load = 0; addr = '0; wdata = '0; s_query = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) write_row(r, rnd());
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); re = 1; addr = AW'(r);
      @(negedge clk); re = 0;
      check(rvalid && rdata == shadow[r], "read back");
    end
    for (int t = 0; t < 40; t++) begin
      q = rnd();
      // rows at a chosen distance: exact match, one mismatch, all mismatch
      if (t % 8 == 0) begin
        write_row(0, q); write_row(1, q ^ COLS'(1) << $urandom_range(0, COLS-1));
        write_row(2, ~q);
      end
      @(negedge clk); s_load = 1; s_query = q;
      @(negedge clk); s_load = 0; s_query = rnd();
      for (int r = 0; r < ROWS; r++)
        check(32'(ml_cnt[r]) == $countones(shadow[r] ^ q), "matchline count");
      if (t % 8 == 0) begin
        check(ml_cnt[0] == 0, "exact match row");
        check(ml_cnt[1] == 1, "single mismatch row");
        check(32'(ml_cnt[2]) == COLS, "complement row");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
