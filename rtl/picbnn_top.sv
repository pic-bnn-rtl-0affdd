// picbnn_top: 128-kbit PiC-BNN processing-in-CAM binary neural network array.
//
// Four 64 x 512 CAM banks store binary weights, one neuron per row. A search
// drives the binary input activations onto the searchlines of all rows at once;
// each row's matchline discharges through its mismatching cells and its sense
// amplifier returns 1 when the row's Hamming distance to the query is within
// the HD tolerance threshold. With the threshold at half the word width this is
// the sign of the binary dot product plus the batch-normalisation constant
// stored in the row, i.e. a complete binary neuron. Sweeping the threshold and
// voting over the passes replaces a high-precision output layer.
//
// Structure: picbnn_bank x NB (bitcells, write drivers, searchline drivers,
// matchline counts) -> picbnn_array_cfg (256x512 / 128x1024 / 64x2048
// arrangement, joined matchlines) -> picbnn_mlsa (sense amplifiers and output
// register). picbnn_vbias_lut gives the threshold of a characterised voltage
// setting; picbnn_infer_ctrl and picbnn_vote run batched multi-threshold
// inference.
//
// Interface and timing (one clock, active-low asynchronous reset):
//  - Host write/read of physical row (bank, row): one per cycle, read data one
//    cycle later.
//  - Host search (hs_valid, hs_query, hs_tol) when the sequencer is idle. The
//    query is registered at the edge where hs_valid is high, the matchlines
//    evaluate in the next cycle, and the sense amplifiers capture at the
//    following edge: act_out/act_valid appear two edges after the request. One
//    search per cycle. With tol_from_vbias high the threshold is instead the one
//    picbnn_vbias_lut gives for the voltage inputs.
//  - Sequencer: load images (img_we), set hid_tol, oq_const and n_cls, pulse
//    seq_start, answer reload_req (rewrite the array, change cfg) and
//    retune_req (set voltages for retune_tol) with acks; seq_done then holds
//    votes, top1 and top2 for every image.
// Logical row r of the arrangement is act_out[r]. Weights are written by
// physical address: logical row r, word slice s lives in bank (r / ROWS) * G + s,
// row r % ROWS, where G = 1, 2, 4 banks per word for cfg 256x512, 128x1024,
// 64x2048.
//
// Published: bank count and size, the three arrangements, the bitcell, the
// threshold-controlled sensing, the voltage table and the inference algorithm.
// This design's choices: the digital model of the analog matchline, the
// one-cycle search pipeline, the host port formats, the sequencer handshakes
// and the batch size.
module picbnn_top
  import picbnn_pkg::*;
#(
  parameter int unsigned NB      = 4,
  parameter int unsigned ROWS    = 64,
  parameter int unsigned COLS    = 512,
  parameter int unsigned BATCH   = 8,
  parameter int unsigned NLEVELS = 33,
  parameter int unsigned STEP    = 2,
  parameter int unsigned NCLS    = 32,
  parameter int unsigned VW      = 6,
  localparam int unsigned QW     = NB * COLS,
  localparam int unsigned NR     = NB * ROWS,
  localparam int unsigned AW     = $clog2(ROWS),
  localparam int unsigned BW     = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned IW     = (BATCH > 1) ? $clog2(BATCH) : 1,
  localparam int unsigned CIW    = (NCLS > 1) ? $clog2(NCLS) : 1,
  localparam int unsigned NW     = $clog2(NCLS + 1),
  localparam int unsigned LW     = $clog2(NLEVELS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_e            cfg,
  // host write / read, physical addressing
  input  logic            wr_en,
  input  logic            rd_en,
  input  logic [BW-1:0]   bank_sel,
  input  logic [AW-1:0]   row_sel,
  input  logic [COLS-1:0] wr_data,
  output logic [COLS-1:0] rd_data,
  output logic            rd_valid,
  // host search
  input  logic            hs_valid,
  input  logic [QW-1:0]   hs_query,
  input  logic [HD_W-1:0] hs_tol,
  input  logic            tol_from_vbias,
  // user-configurable voltages (mV)
  input  logic [MV_W-1:0] vref_mv,
  input  logic [MV_W-1:0] veval_mv,
  input  logic [MV_W-1:0] vst_mv,
  output logic            vbias_known,
  output logic [HD_W-1:0] vbias_tol,
  // output activations
  output logic [NR-1:0]   act_out,
  output logic            act_valid,
  // inference sequencer
  input  logic            img_we,
  input  logic [IW-1:0]   img_idx,
  input  logic [QW-1:0]   img_data,
  input  logic            seq_start,
  input  logic [HD_W-1:0] hid_tol,
  input  logic [QW-1:0]   oq_const,
  input  logic [NW-1:0]   n_cls,
  output logic            seq_busy,
  output logic            seq_done,
  output logic            reload_req,
  input  logic            reload_ack,
  output logic            retune_req,
  output logic [HD_W-1:0] retune_tol,
  input  logic            retune_ack,
  output logic [LW-1:0]   level,
  output logic [VW-1:0]   votes [BATCH][NCLS],
  output logic [CIW-1:0]  top1  [BATCH],
  output logic [CIW-1:0]  top2  [BATCH]
);

  localparam int unsigned CW  = $clog2(COLS + 1);
  localparam int unsigned LCW = $clog2(QW + 1);

  // ---------------- search request selection ----------------
  logic            seq_s_valid;
  logic [QW-1:0]   seq_s_query;
  logic [HD_W-1:0] seq_s_tol;
  logic            s_valid;
  logic [QW-1:0]   s_query;
  logic [HD_W-1:0] s_tol;

  always_comb begin
    if (seq_busy) begin
      s_valid = seq_s_valid;
      s_query = seq_s_query;
      s_tol   = seq_s_tol;
    end else begin
      s_valid = hs_valid;
      s_query = hs_query;
      s_tol   = tol_from_vbias ? vbias_tol : hs_tol;
    end
  end

  // Threshold and sense enable follow the query by one cycle (evaluation phase)
  logic            sen;
  logic [HD_W-1:0] tol_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sen   <= 1'b0;
      tol_q <= '0;
    end else begin
      sen <= s_valid;
      if (s_valid) tol_q <= s_tol;
    end
  end

  // ---------------- banks ----------------
  logic [COLS-1:0] bank_query [NB];
  logic [COLS-1:0] bank_rdata [NB];
  logic [NB-1:0]   bank_rvalid;
  logic [CW-1:0]   bank_cnt   [NB][ROWS];
  logic [LCW-1:0]  row_cnt    [NR];
  logic [NR-1:0]   row_en;

  // Query slicing and matchline joining; cfg must stay unchanged from a search
  // request until its result is captured.
  picbnn_array_cfg #(.NB(NB), .ROWS(ROWS), .COLS(COLS)) u_cfg (
    .cfg(cfg), .query(s_query), .bank_query(bank_query),
    .bank_cnt(bank_cnt), .row_cnt(row_cnt), .row_en(row_en)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    picbnn_bank #(.ROWS(ROWS), .COLS(COLS)) u_bank (
      .clk, .rst_n,
      .we(wr_en && 32'(bank_sel) == b),
      .re(rd_en && 32'(bank_sel) == b),
      .addr(row_sel), .wdata(wr_data),
      .rdata(bank_rdata[b]), .rvalid(bank_rvalid[b]),
      .s_load(s_valid), .s_query(bank_query[b]),
      .ml_cnt(bank_cnt[b])
    );
  end

  always_comb begin
    rd_data = '0;
    for (int b = 0; b < NB; b++)
      if (bank_rvalid[b]) rd_data = bank_rdata[b];
  end
  assign rd_valid = |bank_rvalid;

  // ---------------- sense amplifiers ----------------
  picbnn_mlsa #(.NROWS(NR), .LCW(LCW)) u_mlsa (
    .clk, .rst_n, .sen, .tol(tol_q), .row_cnt, .row_en,
    .act(act_out), .act_valid
  );

  // ---------------- voltage table ----------------
  picbnn_vbias_lut u_vbias (
    .vref_mv, .veval_mv, .vst_mv, .known(vbias_known), .tol(vbias_tol)
  );

  // ---------------- inference sequencer and votes ----------------
  logic            vote_clr, vote_add;
  logic [IW-1:0]   vote_img;
  logic [NR-1:0]   vote_bits;
  logic [NCLS-1:0] vote_cls;

  picbnn_infer_ctrl #(
    .QW(QW), .NR(NR), .BATCH(BATCH), .NLEVELS(NLEVELS), .STEP(STEP)
  ) u_ctrl (
    .clk, .rst_n,
    .img_we, .img_idx, .img_data,
    .start(seq_start), .hid_tol, .oq_const,
    .busy(seq_busy), .done(seq_done),
    .s_valid(seq_s_valid), .s_query(seq_s_query), .s_tol(seq_s_tol),
    .act_valid, .act(act_out),
    .reload_req, .reload_ack, .retune_req, .retune_tol, .retune_ack,
    .vote_clr, .vote_add, .vote_img, .vote_bits, .level
  );

  always_comb begin
    vote_cls = '0;
    for (int c = 0; c < NCLS; c++)
      if (c < int'(NR)) vote_cls[c] = vote_bits[c];
  end

  picbnn_vote #(.BATCH(BATCH), .NCLS(NCLS), .VW(VW)) u_vote (
    .clk, .rst_n, .clr(vote_clr), .add_en(vote_add), .add_img(vote_img),
    .add_bits(vote_cls), .n_cls, .votes, .top1, .top2
  );

endmodule
