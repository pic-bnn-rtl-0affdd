// tb_picbnn_array_cfg: self-checking test of the bank arrangement logic.
// For each of the three arrangements, random queries and random per-bank
// matchline counts are applied; the testbench computes independently which
// query slice each bank must see, the joined count of every logical row and
// which logical rows exist.
module tb_picbnn_array_cfg;
  import picbnn_pkg::*;
  localparam int unsigned NB = 4, ROWS = 64, COLS = 512;
  localparam int unsigned CW = $clog2(COLS + 1), LCW = $clog2(NB * COLS + 1);
  cfg_e cfg;
  logic [NB*COLS-1:0] query;
  logic [COLS-1:0] bank_query [NB];
  logic [CW-1:0] bank_cnt [NB][ROWS];
  logic [LCW-1:0] row_cnt [NB*ROWS];
  logic [NB*ROWS-1:0] row_en;
  int checks = 0, failures = 0;
  logic clk = 0;

  picbnn_array_cfg #(.NB(NB), .ROWS(ROWS), .COLS(COLS)) dut (
    .cfg, .query, .bank_query, .bank_cnt, .row_cnt, .row_en);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s cfg=%0d", what, cfg); end
  endtask

  initial begin
    cfg_e cfgs [3] = '{CFG_256X512, CFG_128X1024, CFG_64X2048};
    int g, exp_cnt;
    for (int t = 0; t < 60; t++) begin
      cfg = cfgs[t % 3];
      g = (cfg == CFG_256X512) ? 1 : (cfg == CFG_128X1024) ? 2 : 4;
      for (int i = 0; i < NB * COLS; i += 32) query[i +: 32] = $urandom;
      for (int b = 0; b < NB; b++)
        for (int r = 0; r < ROWS; r++) bank_cnt[b][r] = CW'($urandom_range(0, COLS));
      #1;
      for (int b = 0; b < NB; b++)
        check(bank_query[b] == query[(b % g) * COLS +: COLS], "query slice");
      for (int lr = 0; lr < NB * ROWS; lr++) begin
        if (lr < (NB / g) * ROWS) begin
          exp_cnt = 0;
          for (int s = 0; s < g; s++) exp_cnt += bank_cnt[(lr / ROWS) * g + s][lr % ROWS];
          check(row_en[lr] == 1'b1, "row exists");
          check(32'(row_cnt[lr]) == exp_cnt, "joined matchline count");
        end else begin
          check(row_en[lr] == 1'b0, "row absent");
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
