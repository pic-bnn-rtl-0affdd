// picbnn_infer_ctrl: sequencer for batched multi-threshold inference.
//
// The network is a binary MLP with one hidden layer. Every layer is one CAM
// search: the input vector is the query, each row holds one neuron's weights
// plus cells that encode its batch-normalisation constant, and each row's sense
// amplifier returns the neuron's binary output. The hidden layer is searched
// once per image at the tolerance hid_tol (the majority point). The output layer
// is searched NLEVELS times per image, at tolerances 0, STEP, 2*STEP, ...; the
// votes over all passes decide the class. Changing the tolerance means retuning
// analog voltages, which is slow, so each tolerance is applied to the whole
// batch of BATCH images before moving to the next one.
//
// Sequence after start (images already in the image buffer):
//   1. HID_ISSUE/HID_WAIT: one search per cycle, query = image i, tol = hid_tol;
//      each returned activation vector is stored as hid[i].
//   2. RELOAD: reload_req high until reload_ack, while the host replaces the
//      hidden-layer weights by the output-layer weights (the two layers of the
//      evaluated models do not fit the array at the same time).
//   3. For level = 0 .. NLEVELS-1: RETUNE (retune_req with retune_tol =
//      level*STEP until retune_ack), then OUT_ISSUE/OUT_WAIT: one search per
//      cycle, query = hid[i] | oq_const, tol = level*STEP; each result is
//      added to the votes of image i (vote_add).
//   4. DONE: done high until the next start.
// Results are matched to images by arrival order; the search path must return
// exactly one act_valid per issued search, in order.
//
// The algorithm (input layer once, output layer at HD 0, 2, ..., 64, i.e. 33
// passes, majority vote) and the batching across one voltage setting are
// published. The buffers, the handshakes, the state machine and the default
// batch size of 8 are this design's choices.
module picbnn_infer_ctrl
  import picbnn_pkg::*;
#(
  parameter int unsigned QW      = 2048,  // query width
  parameter int unsigned NR      = 256,   // activation vector width
  parameter int unsigned BATCH   = 8,
  parameter int unsigned NLEVELS = 33,
  parameter int unsigned STEP    = 2,
  localparam int unsigned IW     = (BATCH > 1) ? $clog2(BATCH) : 1,
  localparam int unsigned LW     = $clog2(NLEVELS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // image buffer load
  input  logic            img_we,
  input  logic [IW-1:0]   img_idx,
  input  logic [QW-1:0]   img_data,
  // control
  input  logic            start,
  input  logic [HD_W-1:0] hid_tol,
  input  logic [QW-1:0]   oq_const,   // constant query bits of the output layer
  output logic            busy,
  output logic            done,
  // array search port
  output logic            s_valid,
  output logic [QW-1:0]   s_query,
  output logic [HD_W-1:0] s_tol,
  input  logic            act_valid,
  input  logic [NR-1:0]   act,
  // weight reload and voltage retune handshakes with the host
  output logic            reload_req,
  input  logic            reload_ack,
  output logic            retune_req,
  output logic [HD_W-1:0] retune_tol,
  input  logic            retune_ack,
  // vote unit
  output logic            vote_clr,
  output logic            vote_add,
  output logic [IW-1:0]   vote_img,
  output logic [NR-1:0]   vote_bits,
  output logic [LW-1:0]   level
);

  typedef enum logic [2:0] {
    S_IDLE, S_HID_ISSUE, S_HID_WAIT, S_RELOAD, S_RETUNE, S_OUT_ISSUE, S_OUT_WAIT, S_DONE
  } state_e;

  state_e           state;
  logic [QW-1:0]    img [BATCH];
  logic [NR-1:0]    hid [BATCH];
  logic [IW-1:0]    issue_i;
  logic [IW:0]      rx_n;        // results received in this phase
  logic [HD_W-1:0]  cur_tol;

  assign cur_tol = HD_W'(32'(level) * STEP);
  wire out_phase = (state == S_OUT_ISSUE) || (state == S_OUT_WAIT);
  wire last_issue = (32'(issue_i) == BATCH - 1);
  wire all_rx     = (32'(rx_n) == BATCH);

  always_ff @(posedge clk) begin
    if (img_we && !busy) img[img_idx] <= img_data;
  end

  always_comb begin
    s_valid = 1'b0;
    s_query = '0;
    s_tol   = '0;
    if (state == S_HID_ISSUE) begin
      s_valid = 1'b1;
      s_query = img[issue_i];
      s_tol   = hid_tol;
    end else if (state == S_OUT_ISSUE) begin
      s_valid = 1'b1;
      s_query = oq_const | QW'(hid[issue_i]);
      s_tol   = cur_tol;
    end
  end

  assign busy       = (state != S_IDLE) && (state != S_DONE);
  assign done       = (state == S_DONE);
  assign reload_req = (state == S_RELOAD);
  assign retune_req = (state == S_RETUNE);
  assign retune_tol = cur_tol;
  assign vote_clr   = (state == S_IDLE || state == S_DONE) && start;
  assign vote_add   = act_valid && out_phase;
  assign vote_img   = rx_n[IW-1:0];
  assign vote_bits  = act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      issue_i <= '0;
      rx_n    <= '0;
      level   <= '0;
      for (int i = 0; i < BATCH; i++) hid[i] <= '0;
    end else begin
      if (act_valid) begin
        rx_n <= rx_n + 1'b1;
        if (!out_phase) hid[rx_n[IW-1:0]] <= act;
      end
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state   <= S_HID_ISSUE;
          issue_i <= '0;
          rx_n    <= '0;
          level   <= '0;
        end
        S_HID_ISSUE: begin
          issue_i <= issue_i + 1'b1;
          if (last_issue) state <= S_HID_WAIT;
        end
        S_HID_WAIT: if (all_rx) state <= S_RELOAD;
        S_RELOAD:   if (reload_ack) state <= S_RETUNE;
        S_RETUNE: if (retune_ack) begin
          state   <= S_OUT_ISSUE;
          issue_i <= '0;
          rx_n    <= '0;
        end
        S_OUT_ISSUE: begin
          issue_i <= issue_i + 1'b1;
          if (last_issue) state <= S_OUT_WAIT;
        end
        S_OUT_WAIT: if (all_rx) begin
          if (32'(level) == NLEVELS - 1) state <= S_DONE;
          else begin
            level <= level + 1'b1;
            state <= S_RETUNE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // One result per issued search: never more results than searches in a phase
  a_rx_bound: assert property (@(posedge clk) disable iff (!rst_n)
    act_valid && busy |-> 32'(rx_n) < BATCH);

endmodule
