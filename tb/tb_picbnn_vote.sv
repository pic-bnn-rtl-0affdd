// tb_picbnn_vote: self-checking test of the vote counters.
// Random add streams (with a restricted class count and forced ties) are
// mirrored by a testbench model; counters, saturation, clear, and the Top-1 /
// Top-2 classes (lowest index wins a tie) are compared with the model.
module tb_picbnn_vote;
  localparam int unsigned BATCH = 8, NCLS = 32, VW = 6;
  localparam int unsigned IW = $clog2(BATCH), CIW = $clog2(NCLS), NW = $clog2(NCLS + 1);
  logic clk = 0, rst_n = 0, clr, add_en;
  logic [IW-1:0] add_img;
  logic [NCLS-1:0] add_bits;
  logic [NW-1:0] n_cls;
  logic [VW-1:0] votes [BATCH][NCLS];
  logic [CIW-1:0] top1 [BATCH], top2 [BATCH];
  int model [BATCH][NCLS];
  int checks = 0, failures = 0;

  picbnn_vote #(.BATCH(BATCH), .NCLS(NCLS), .VW(VW)) dut (
    .clk, .rst_n, .clr, .add_en, .add_img, .add_bits, .n_cls, .votes, .top1, .top2);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic compare(input int nc);
    int b1, b2;
    for (int i = 0; i < BATCH; i++) begin
      for (int c = 0; c < NCLS; c++) check(32'(votes[i][c]) == model[i][c], "vote count");
      b1 = 0;
      for (int c = 0; c < nc; c++) if (model[i][c] > model[i][b1]) b1 = c;
      b2 = (b1 == 0) ? 1 : 0;
      for (int c = 0; c < nc; c++) if (c != b1 && model[i][c] > model[i][b2]) b2 = c;
      check(32'(top1[i]) == b1, "top1");
      check(32'(top2[i]) == b2, "top2");
    end
  endtask

  initial begin
    int nc;
    clr = 0; add_en = 0; add_img = '0; add_bits = '0; n_cls = NW'(10);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      nc = (round % 2 == 0) ? 10 : 20;
      if (round == 5) nc = NCLS;
      n_cls = NW'(nc);
      clr = 1; @(negedge clk); clr = 0;
      for (int i = 0; i < BATCH; i++) for (int c = 0; c < NCLS; c++) model[i][c] = 0;
      compare(nc);
      // round 4 runs long enough to saturate the counters
      for (int t = 0; t < ((round == 4) ? 900 : 264); t++) begin
        add_en = ($urandom_range(0, 4) != 0);
        add_img = IW'($urandom);
        add_bits[31:0] = (round == 3) ? 32'hFFFF_FFFF : $urandom;
        if (add_en)
          for (int c = 0; c < nc; c++)
            if (add_bits[c] && model[add_img][c] < (1 << VW) - 1) model[add_img][c]++;
        @(negedge clk);
      end
      add_en = 0;
      compare(nc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
