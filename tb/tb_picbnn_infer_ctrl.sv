// tb_picbnn_infer_ctrl: self-checking test of the batched inference sequencer.
// The CAM is replaced by a testbench model with the same two-edge latency:
// row r returns 1 when the query has at most tol ones inside a fixed random
// mask of that row. The testbench predicts every hidden vector, every
// output-layer query and threshold, every vote, the retune thresholds
// 0, STEP, 2*STEP, ..., and checks that searches are issued one per cycle in
// runs of BATCH, that exactly BATCH*(1+NLEVELS) searches are issued, and that
// both handshakes are held until acknowledged. The sequence runs twice.
module tb_picbnn_infer_ctrl;
  import picbnn_pkg::*;
  localparam int unsigned QW = 64, NR = 16, BATCH = 4, NLEVELS = 5, STEP = 2;
  localparam int unsigned IW = $clog2(BATCH), LW = $clog2(NLEVELS + 1);
  logic clk = 0, rst_n = 0;
  logic img_we, start, busy, done, s_valid, act_valid, reload_req, reload_ack;
  logic retune_req, retune_ack, vote_clr, vote_add;
  logic [IW-1:0] img_idx, vote_img;
  logic [QW-1:0] img_data, oq_const, s_query;
  logic [HD_W-1:0] hid_tol, s_tol, retune_tol;
  logic [NR-1:0] act, vote_bits;
  logic [LW-1:0] level;
  logic [QW-1:0] mask [NR];
  logic [QW-1:0] imgs [BATCH];
  logic [NR-1:0] exp_hid [BATCH];
  int checks = 0, failures = 0;

  picbnn_infer_ctrl #(.QW(QW), .NR(NR), .BATCH(BATCH), .NLEVELS(NLEVELS), .STEP(STEP)) dut (
    .clk, .rst_n, .img_we, .img_idx, .img_data, .start, .hid_tol, .oq_const,
    .busy, .done, .s_valid, .s_query, .s_tol, .act_valid, .act,
    .reload_req, .reload_ack, .retune_req, .retune_tol, .retune_ack,
    .vote_clr, .vote_add, .vote_img, .vote_bits, .level);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  function automatic logic [NR-1:0] cam(input logic [QW-1:0] q, input int tol);
    logic [NR-1:0] a;
    for (int r = 0; r < NR; r++) a[r] = ($countones(q & mask[r]) <= tol);
    return a;
  endfunction

  // CAM model: two-edge latency
  logic            p1_v, p2_v;
  logic [NR-1:0]   p1_a, p2_a;
  always_ff @(posedge clk) begin
    p1_v <= s_valid; p1_a <= cam(s_query, int'(s_tol));
    p2_v <= p1_v;    p2_a <= p1_a;
  end
  assign act_valid = p2_v;
  assign act = p2_a;

  // Monitor: predicted search stream
  int n_search, run, phase_img, lvl_seen, n_runs_bad, n_vote;
  always @(posedge clk) if (rst_n) begin
    if (s_valid) begin
      n_search++;
      run++;
      if (s_tol == hid_tol && !dut.out_phase) begin
        check(s_query == imgs[phase_img], "hidden query");
      end else begin
        check(s_query == (oq_const | QW'(exp_hid[phase_img])), "output query");
        check(32'(s_tol) == 32'(level) * STEP, "output threshold");
      end
      phase_img = (phase_img + 1) % BATCH;
    end else if (run != 0) begin
      if (run != BATCH) n_runs_bad++;
      run = 0;
    end
    if (vote_add) begin
      n_vote++;
      check(vote_bits == cam(oq_const | QW'(exp_hid[vote_img]), 32'(level) * STEP), "vote bits");
    end
  end

  task automatic run_once();
    int cyc, n_retune;
    n_search = 0; run = 0; phase_img = 0; n_runs_bad = 0; n_vote = 0; n_retune = 0;
    for (int i = 0; i < BATCH; i++) begin
      for (int k = 0; k < QW; k += 32) imgs[i][k +: 32] = $urandom;
      exp_hid[i] = cam(imgs[i], int'(hid_tol));
      @(negedge clk); img_we = 1; img_idx = IW'(i); img_data = imgs[i];
    end
    @(negedge clk); img_we = 0;
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin
      if (reload_req) begin
        check(n_search == BATCH, "hidden layer complete before reload");
        repeat (3) begin @(negedge clk); cyc++; check(reload_req, "reload held"); end
        reload_ack = 1; @(negedge clk); cyc++; reload_ack = 0;
      end else if (retune_req) begin
        check(32'(retune_tol) == n_retune * STEP, "retune threshold sequence");
        repeat (2) begin @(negedge clk); cyc++; check(retune_req, "retune held"); end
        retune_ack = 1; @(negedge clk); cyc++; retune_ack = 0;
        n_retune++;
      end else begin
        @(negedge clk); cyc++;
      end
    end
    check(done && !busy, "done");
    check(n_search == BATCH * (1 + NLEVELS), "number of searches");
    check(n_vote == BATCH * NLEVELS, "number of votes");
    check(n_retune == NLEVELS, "number of retunes");
    check(n_runs_bad == 0, "one search per cycle in runs of BATCH");
    $display("sequence: %0d cycles, %0d searches", cyc, n_search);
  endtask

  initial begin
    img_we = 0; start = 0; reload_ack = 0; retune_ack = 0; img_idx = '0; img_data = '0;
    for (int r = 0; r < NR; r++) for (int k = 0; k < QW; k += 32) mask[r][k +: 32] = $urandom;
    hid_tol = HD_W'(16);
    oq_const = {QW/2{2'b01}} & ~QW'({NR{1'b1}});
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_once();
    hid_tol = HD_W'(15);
    run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
