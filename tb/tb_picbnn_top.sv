// tb_picbnn_top: end-to-end test of the PiC-BNN array at reduced size (16-row, 64-column banks, batch 4, 9 thresholds).
//
// A random binary MLP (N_IN -> N_HID -> N_CLS) with batch-normalisation
// constants is mapped onto the array: the hidden layer in the 128 x 1024
// arrangement (scaled with the bank size), one neuron per logical row, with the
// constant encoded in the spare cells of the row as +1/-1 cells summing to C
// and the threshold at half the word width (majority); the output layer, after
// a weight reload, in the 256 x 512 arrangement with the constant as |C|
// matching or mismatching cells. Each image is assigned a class whose output
// weights differ from the image's hidden vector in N_HID/8 bits; the other
// classes' weights are random. The testbench
//   1. writes and reads back the hidden layer;
//   2. runs host searches in all three arrangements (and one with the threshold
//      taken from a characterised voltage setting) against a reference that
//      computes each logical row's Hamming distance from its own copy of the
//      array contents;
//   3. runs the batched multi-threshold sequence, answering the reload and
//      retune requests, and checks every vote count and the Top-1 / Top-2 class
//      of every image against a reference computed directly from the network
//      (sign of dot product plus constant for the hidden layer, distance
//      within threshold for each output pass), and that each image's own class
//      wins the vote;
//   4. checks one search per cycle, the two-edge search latency and that each
//      mechanism (three arrangements, reload, retune, voltage table, read-back)
//      happened at least once.
module tb_picbnn_top;
  import picbnn_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  localparam int unsigned NB = 4, ROWS = 16, COLS = 64, BATCH = 4, NLEVELS = 9, STEP = 2;
  localparam int unsigned NCLS = 32, VW = 6;
  localparam int unsigned N_IN = 100, N_HID = 32, N_CLS = 20;   // hidden layer fills its 32 rows; 20 classes
  localparam int C1_MAX = 6, C2_MAX = 3;
  localparam int unsigned RETUNE_CYC = 2;
  localparam int unsigned WATCHDOG = 20000;
  localparam int unsigned QW = NB * COLS, NR = NB * ROWS, AW = $clog2(ROWS);
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1, IW = (BATCH > 1) ? $clog2(BATCH) : 1;
  localparam int unsigned CIW = $clog2(NCLS), NW = $clog2(NCLS + 1), LW = $clog2(NLEVELS + 1);
  localparam int unsigned WH = 2 * COLS;           // hidden-layer word width (128 x 1024 arrangement)
  localparam int unsigned WO = COLS;               // output-layer word width (256 x 512 arrangement)
  localparam int unsigned FLIPS = N_HID / 8;       // distance of an image's hidden vector to its class

  logic clk = 0, rst_n = 0;
  cfg_e cfg;
  logic wr_en, rd_en, rd_valid, hs_valid, tol_from_vbias, vbias_known, act_valid;
  logic [BW-1:0] bank_sel;
  logic [AW-1:0] row_sel;
  logic [COLS-1:0] wr_data, rd_data;
  logic [QW-1:0] hs_query, img_data, oq_const;
  logic [HD_W-1:0] hs_tol, vbias_tol, hid_tol, retune_tol;
  logic [MV_W-1:0] vref_mv, veval_mv, vst_mv;
  logic [NR-1:0] act_out;
  logic img_we, seq_start, seq_busy, seq_done, reload_req, reload_ack, retune_req, retune_ack;
  logic [IW-1:0] img_idx;
  logic [NW-1:0] n_cls;
  logic [LW-1:0] level;
  logic [VW-1:0] votes [BATCH][NCLS];
  logic [CIW-1:0] top1 [BATCH], top2 [BATCH];

  // reference copy of the array, network and images
  logic [COLS-1:0] mem [NB][ROWS];
  logic [N_IN-1:0] w1 [N_HID];
  int              c1 [N_HID];
  logic [N_HID-1:0] w2 [N_CLS];
  int              c2 [N_CLS];
  logic [N_IN-1:0] x [BATCH];
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_search_cfg [3] = '{0, 0, 0}, n_vbias = 0, n_reload = 0, n_retune = 0;

  picbnn_top #(.NB(NB), .ROWS(ROWS), .COLS(COLS), .BATCH(BATCH), .NLEVELS(NLEVELS), .STEP(STEP),
    .NCLS(NCLS), .VW(VW)) dut (
    .clk, .rst_n, .cfg, .wr_en, .rd_en, .bank_sel, .row_sel, .wr_data, .rd_data, .rd_valid,
    .hs_valid, .hs_query, .hs_tol, .tol_from_vbias, .vref_mv, .veval_mv, .vst_mv,
    .vbias_known, .vbias_tol, .act_out, .act_valid,
    .img_we, .img_idx, .img_data, .seq_start, .hid_tol, .oq_const, .n_cls,
    .seq_busy, .seq_done, .reload_req, .reload_ack, .retune_req, .retune_tol, .retune_ack,
    .level, .votes, .top1, .top2);

  always #20 clk = ~clk;   // 25 MHz
  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s t=%0t", what, $time);
    end
  endtask

  function automatic int groupsz(cfg_e c);
    return (c == CFG_256X512) ? 1 : (c == CFG_128X1024) ? 2 : 4;
  endfunction

  // ---------- array access ----------
  task automatic write_phys(input int b, input int r, input logic [COLS-1:0] d);
    @(negedge clk);
    wr_en = 1; bank_sel = BW'(b); row_sel = AW'(r); wr_data = d; mem[b][r] = d;
    @(negedge clk);
    wr_en = 0;
    n_write++;
  endtask

  task automatic write_logical(input cfg_e c, input int lr, input logic [QW-1:0] word);
    int g;
    g = groupsz(c);
    for (int s = 0; s < g; s++)
      write_phys((lr / ROWS) * g + s, lr % ROWS, word[s * COLS +: COLS]);
  endtask

  // reference: logical row outputs of a search
  function automatic logic [NR-1:0] ref_search(cfg_e c, logic [QW-1:0] q, int tol);
    logic [NR-1:0] a = '0;
    int g = groupsz(c), h;
    for (int lr = 0; lr < (NB / g) * ROWS; lr++) begin
      h = 0;
      for (int s = 0; s < g; s++)
        h += $countones(mem[(lr / ROWS) * g + s][lr % ROWS] ^ q[s * COLS +: COLS]);
      a[lr] = (h <= tol);
    end
    return a;
  endfunction

  task automatic host_search(input cfg_e c, input logic [QW-1:0] q, input int tol, input bit use_v);
    logic [NR-1:0] e;
    cfg = c;
    @(negedge clk);
    hs_valid = 1; hs_query = q; hs_tol = HD_W'(tol); tol_from_vbias = use_v;
    e = ref_search(c, q, use_v ? int'(vbias_tol) : tol);
    @(negedge clk);
    hs_valid = 0; hs_query = '0; tol_from_vbias = 0;
    check(!act_valid, "no result after one edge");
    @(negedge clk);
    check(act_valid, "result after two edges");
    check(act_out == e, "host search outputs");
    n_search_cfg[int'(c)]++;
  endtask

  // ---------- network ----------
  // hidden-layer row: weights, then WH-N_IN cells worth C (k+C)/2 ones (+1) and the rest zeros
  function automatic logic [QW-1:0] hid_row(int j);
    logic [QW-1:0] w = '0;
    int k = WH - N_IN, np = (k + c1[j]) / 2;
    w[N_IN-1:0] = w1[j];
    for (int i = 0; i < k; i++) w[N_IN + i] = (i < np);
    return w;
  endfunction

  function automatic logic [QW-1:0] hid_query(int b);
    logic [QW-1:0] q = '0;
    q[N_IN-1:0] = x[b];
    for (int i = N_IN; i < int'(WH); i++) q[i] = 1'b1;
    return q;
  endfunction

  // output-layer row: weights, |C| constant cells (1 = match for C > 0, 0 = mismatch), rest matching
  function automatic logic [QW-1:0] out_row(int c);
    logic [QW-1:0] w = '0;
    w[N_HID-1:0] = w2[c];
    for (int i = N_HID; i < int'(WO); i++) w[i] = 1'b1;
    if (c2[c] < 0)
      for (int i = 0; i < -c2[c]; i++) w[N_HID + i] = 1'b0;
    return w;
  endfunction

  // reference network
  function automatic logic [N_HID-1:0] ref_hidden(int b);
    logic [N_HID-1:0] h;
    int s;
    for (int j = 0; j < N_HID; j++) begin
      s = N_IN - 2 * $countones(w1[j] ^ x[b]) + c1[j];
      h[j] = (s >= 0);
    end
    return h;
  endfunction

  function automatic int ref_votes(int b, int c);
    logic [N_HID-1:0] h = ref_hidden(b);
    int hd = $countones(w2[c] ^ h) + ((c2[c] < 0) ? -c2[c] : 0), v = 0;
    for (int l = 0; l < NLEVELS; l++) if (hd <= l * STEP) v++;
    return v;
  endfunction

  function automatic int target(int b);
    return (b * 3) % N_CLS;
  endfunction

  // ---------- monitor: search rate during the sequence ----------
  int n_seq_results = 0, run = 0, bad_runs = 0;
  always @(posedge clk) if (rst_n && seq_busy) begin
    if (act_valid) begin n_seq_results++; run++; end
    else if (run != 0) begin if (run != BATCH) bad_runs++; run = 0; end
  end

  initial begin
    int hv [NCLS];
    int cyc, b1, b2, sw_correct, top1_agree;
    logic [QW-1:0] q;
    cfg = CFG_128X1024; wr_en = 0; rd_en = 0; bank_sel = '0; row_sel = '0; wr_data = '0;
    hs_valid = 0; hs_query = '0; hs_tol = '0; tol_from_vbias = 0;
    vref_mv = MV_W'(1200); veval_mv = MV_W'(1200); vst_mv = MV_W'(1200);
    img_we = 0; img_idx = '0; img_data = '0; seq_start = 0; reload_ack = 0; retune_ack = 0;
    oq_const = '0; n_cls = NW'(N_CLS); hid_tol = HD_W'(WH / 2);
    for (int b = 0; b < NB; b++) for (int r = 0; r < ROWS; r++) mem[b][r] = '0;

    // random network; hidden constants with the parity of the spare cell count
    for (int j = 0; j < N_HID; j++) begin
      for (int i = 0; i < N_IN; i += 32) w1[j][i +: 32] = $urandom;
      c1[j] = 2 * $urandom_range(0, 2 * C1_MAX) - 2 * C1_MAX + ((WH - N_IN) % 2);
    end
    for (int c = 0; c < N_CLS; c++) begin
      for (int i = 0; i < N_HID; i += 32) w2[c][i +: 32] = $urandom;
      c2[c] = $urandom_range(0, 2 * C2_MAX) - C2_MAX;
    end
    for (int b = 0; b < BATCH; b++) for (int i = 0; i < N_IN; i += 32) x[b][i +: 32] = $urandom;
    // image b belongs to class target(b): that class's output weights are the
    // image's hidden vector with FLIPS bits inverted, the others stay random
    for (int b = 0; b < BATCH; b++) begin
      logic [N_HID-1:0] h;
      int f;
      h = ref_hidden(b);
      f = 0;
      while (f < FLIPS) begin
        int p;
        p = $urandom_range(0, N_HID - 1);
        if (h[p] == ref_hidden(b)[p]) begin h[p] = ~h[p]; f++; end
      end
      w2[target(b)] = h;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. clear the array, then load the hidden layer (128 x 1024 arrangement)
    for (int b = 0; b < NB; b++) for (int r = 0; r < ROWS; r++) write_phys(b, r, '0);
    for (int j = 0; j < N_HID; j++) write_logical(CFG_128X1024, j, hid_row(j));
    for (int t = 0; t < 8; t++) begin
      int b, r;
      b = $urandom_range(0, NB - 1);
      r = $urandom_range(0, ROWS - 1);
      @(negedge clk); rd_en = 1; bank_sel = BW'(b); row_sel = AW'(r);
      @(negedge clk); rd_en = 0;
      check(rd_valid && rd_data == mem[b][r], "read back");
      n_read++;
    end

    // 2. host searches in every arrangement
    for (int t = 0; t < 6; t++) begin
      cfg_e c;
      c = (t % 3 == 0) ? CFG_256X512 : (t % 3 == 1) ? CFG_128X1024 : CFG_64X2048;
      for (int i = 0; i < int'(QW); i += 32) q[i +: 32] = $urandom;
      if (t == 1) q = hid_query(0);
      host_search(c, q, $urandom_range(groupsz(c) * COLS / 2 - 8, groupsz(c) * COLS / 2 + 8), 0);
    end
    // threshold from a characterised voltage setting (HD 4), query at distance
    // 4 and 5 from hidden row 0
    vref_mv = MV_W'(750); veval_mv = MV_W'(950); vst_mv = MV_W'(1200);
    #1 check(vbias_known && vbias_tol == 4, "voltage table lookup");
    q = hid_row(0);
    for (int i = 0; i < 4; i++) q[i] = ~q[i];
    host_search(CFG_128X1024, q, 0, 1);
    check(act_out[0] == 1'b1, "row at HD 4 matches at tolerance 4");
    q[4] = ~q[4];
    host_search(CFG_128X1024, q, 0, 1);
    check(act_out[0] == 1'b0, "row at HD 5 misses at tolerance 4");
    n_vbias++;

    // 3. batched inference
    for (int b = 0; b < BATCH; b++) begin
      @(negedge clk); img_we = 1; img_idx = IW'(b); img_data = hid_query(b);
    end
    @(negedge clk); img_we = 0;
    for (int i = N_HID; i < int'(WO); i++) oq_const[i] = 1'b1;
    cfg = CFG_128X1024;
    seq_start = 1;
    @(negedge clk); seq_start = 0;
    cyc = 1;
    while (!seq_done && cyc < WATCHDOG) begin
      if (reload_req) begin
        check(n_seq_results == BATCH, "hidden layer done before reload");
        cfg = CFG_256X512;
        for (int c = 0; c < N_CLS; c++) write_logical(CFG_256X512, c, out_row(c));
        reload_ack = 1; @(negedge clk); reload_ack = 0;
        n_reload++;
      end else if (retune_req) begin
        check(32'(retune_tol) == n_retune * STEP, "retune threshold");
        repeat (RETUNE_CYC) @(negedge clk);
        retune_ack = 1; @(negedge clk); retune_ack = 0;
        n_retune++;
      end else begin
        @(negedge clk);
      end
      cyc++;
    end
    check(seq_done, "sequence finished");
    check(n_seq_results == BATCH * (1 + NLEVELS), "searches in the sequence");
    check(bad_runs == 0, "one search per cycle in runs of a batch");

    sw_correct = 0; top1_agree = 0;
    for (int b = 0; b < BATCH; b++) begin
      for (int c = 0; c < N_CLS; c++) begin
        hv[c] = ref_votes(b, c);
        check(32'(votes[b][c]) == hv[c], "vote count");
      end
      b1 = 0;
      for (int c = 1; c < N_CLS; c++) if (hv[c] > hv[b1]) b1 = c;
      b2 = (b1 == 0) ? 1 : 0;
      for (int c = 0; c < N_CLS; c++) if (c != b1 && hv[c] > hv[b2]) b2 = c;
      check(32'(top1[b]) == b1, "top1");
      check(32'(top2[b]) == b2, "top2");
      // classification: the planted class wins (or ties with the winner)
      check(votes[b][top1[b]] == votes[b][target(b)] && votes[b][target(b)] > 0, "planted class wins the vote");
    end

    // 4. every mechanism happened
    check(n_write > 0 && n_read > 0, "write and read used");
    for (int i = 0; i < 3; i++) check(n_search_cfg[i] > 0, "arrangement used");
    check(n_vbias > 0, "voltage table used");
    check(n_reload == 1, "weight reload");
    check(n_retune == NLEVELS, "retunes");
    $display("writes=%0d reads=%0d searches 256x512=%0d 128x1024=%0d 64x2048=%0d vbias=%0d reload=%0d retune=%0d",
             n_write, n_read, n_search_cfg[0], n_search_cfg[1], n_search_cfg[2], n_vbias, n_reload, n_retune);
    // agreement of the vote with the plain binary output layer (sign of dot product + C)
    for (int b = 0; b < BATCH; b++) begin
      logic [N_HID-1:0] h;
      int best, sc, bs;
      h = ref_hidden(b);
      best = 0;
      bs = -1000000;
      for (int c = 0; c < N_CLS; c++) begin
        sc = N_HID - 2 * $countones(w2[c] ^ h) + c2[c];
        if (sc > bs) begin bs = sc; best = c; end
      end
      if (32'(top1[b]) == best) top1_agree++;
    end
    $display("sequence: %0d images, %0d cycles from start to done", BATCH, cyc);
    $display("vote Top-1 equals the highest dot-product class for %0d of %0d images", top1_agree, BATCH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
