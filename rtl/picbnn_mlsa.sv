// picbnn_mlsa: behavioural model of the matchline sense amplifiers and output
// register (analog in silicon).
//
// In silicon each row's ML is precharged to VDD and then drained through its
// mismatching cells. The MLSA compares the ML voltage with Vref at the sampling
// instant set by the replica row (Vst). The ML is still above Vref, and the SA
// outputs 1 (+1), when the row has few enough mismatches; the three voltages
// Vref, Veval and Vst together fix the largest Hamming distance that still
// reads as 1, the HD tolerance threshold. Calibrated so that the crossing
// happens when matches equal mismatches, the SA computes the majority of the
// row's XNOR outputs, i.e. the sign of the binary dot product.
//
// This model takes that threshold as a number (tol) and the per-row mismatch
// count as the ML state: act[r] = row_en[r] && (row_cnt[r] <= tol), captured
// at a rising clock edge with sen high (the sense enable) into the output
// register, with act_valid high for one cycle. A tie (count equal to tol) reads
// as 1. Disabled rows read as 0. Analog effects (noise, PVT drift, the exact
// voltage-to-threshold relation) are not modelled.
module picbnn_mlsa
  import picbnn_pkg::*;
#(
  parameter int unsigned NROWS = MAX_ROWS,
  parameter int unsigned LCW   = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sen,
  input  logic [HD_W-1:0]  tol,
  input  logic [LCW-1:0]   row_cnt [NROWS],
  input  logic [NROWS-1:0] row_en,
  output logic [NROWS-1:0] act,
  output logic             act_valid
);

  logic [NROWS-1:0] decide;

  always_comb begin
    for (int r = 0; r < NROWS; r++)
      decide[r] = row_en[r] && (32'(row_cnt[r]) <= 32'(tol));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act       <= '0;
      act_valid <= 1'b0;
    end else begin
      act_valid <= sen;
      if (sen) act <= decide;
    end
  end

endmodule
