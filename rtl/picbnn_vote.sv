// picbnn_vote: per-class vote counters and Top-1 / Top-2 selection.
//
// The output layer of the network is executed many times on the same input,
// each time at a different Hamming-distance tolerance. Each execution gives one
// binary output per class; the prediction is the class whose output was 1 most
// often. This block keeps, for each of BATCH images and NCLS classes, a counter
// of such 1s. An add (add_en high at a rising edge) increments the counters of
// image add_img for every class c < n_cls with add_bits[c] = 1; counters
// saturate at their maximum. clr zeroes all counters.
//
// top1[i] is the class with the most votes for image i, top2[i] the class with
// the most votes among the others; ties go to the lower class index. Both are
// combinational from the counters.
//
// Counting the votes and taking the class with the highest count is the
// published decision rule; where and in what hardware it is computed is not
// described, and this counter array is this design's own realisation.
module picbnn_vote #(
  parameter int unsigned BATCH = 8,
  parameter int unsigned NCLS  = 32,
  parameter int unsigned VW    = 6,
  localparam int unsigned IW   = (BATCH > 1) ? $clog2(BATCH) : 1,
  localparam int unsigned CIW  = (NCLS > 1) ? $clog2(NCLS) : 1,
  localparam int unsigned NW   = $clog2(NCLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            add_en,
  input  logic [IW-1:0]   add_img,
  input  logic [NCLS-1:0] add_bits,
  input  logic [NW-1:0]   n_cls,
  output logic [VW-1:0]   votes [BATCH][NCLS],
  output logic [CIW-1:0]  top1  [BATCH],
  output logic [CIW-1:0]  top2  [BATCH]
);

  localparam logic [VW-1:0] VMAX = '1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BATCH; i++)
        for (int c = 0; c < NCLS; c++)
          votes[i][c] <= '0;
    end else if (clr) begin
      for (int i = 0; i < BATCH; i++)
        for (int c = 0; c < NCLS; c++)
          votes[i][c] <= '0;
    end else if (add_en) begin
      for (int c = 0; c < NCLS; c++)
        if (add_bits[c] && (c < int'(n_cls)) && votes[add_img][c] != VMAX)
          votes[add_img][c] <= votes[add_img][c] + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < BATCH; i++) begin
      int unsigned b1, b2;
      b1 = 0;
      for (int unsigned c = 1; c < NCLS; c++)
        if (c < 32'(n_cls) && votes[i][c] > votes[i][b1]) b1 = c;
      b2 = (b1 == 0) ? 1 : 0;
      for (int unsigned c = 0; c < NCLS; c++)
        if (c < 32'(n_cls) && c != b1 && votes[i][c] > votes[i][b2]) b2 = c;
      top1[i] = b1[CIW-1:0];
      top2[i] = b2[CIW-1:0];
    end
  end

endmodule
