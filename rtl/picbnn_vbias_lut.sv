// picbnn_vbias_lut: HD tolerance established by a (Vref, Veval, Vst) setting.
//
// The array's tolerance to Hamming distance is set by three off-chip voltages:
// the MLSA reference Vref, the evaluation-transistor gate voltage Veval (ML
// discharge rate) and Vst (MLSA sampling time). This table holds the ten
// characterised combinations (all in mV) and the threshold each one gives:
//
//   Vref  Veval  Vst   HD        Vref  Veval  Vst   HD
//   1200  1200  1200    0         950   500  1025   24
//    750   950  1200    4         775   600  1100   28
//    775   600  1200    8        1175   400  1150   32
//   1175   350  1150   12        1000   475   725   36
//    950   525  1100   16
//   1025   475  1000   20
//
// The rows are the published measurements. For any other combination the
// threshold is not known: known is 0 and tol is 0. Combinational.
module picbnn_vbias_lut
  import picbnn_pkg::*;
(
  input  logic [MV_W-1:0] vref_mv,
  input  logic [MV_W-1:0] veval_mv,
  input  logic [MV_W-1:0] vst_mv,
  output logic            known,
  output logic [HD_W-1:0] tol
);

  always_comb begin
    known = 1'b1;
    unique case ({vref_mv, veval_mv, vst_mv})
      {11'd1200, 11'd1200, 11'd1200}: tol = HD_W'(0);
      {11'd750,  11'd950,  11'd1200}: tol = HD_W'(4);
      {11'd775,  11'd600,  11'd1200}: tol = HD_W'(8);
      {11'd1175, 11'd350,  11'd1150}: tol = HD_W'(12);
      {11'd950,  11'd525,  11'd1100}: tol = HD_W'(16);
      {11'd1025, 11'd475,  11'd1000}: tol = HD_W'(20);
      {11'd950,  11'd500,  11'd1025}: tol = HD_W'(24);
      {11'd775,  11'd600,  11'd1100}: tol = HD_W'(28);
      {11'd1175, 11'd400,  11'd1150}: tol = HD_W'(32);
      {11'd1000, 11'd475,  11'd725 }: tol = HD_W'(36);
      default: begin
        known = 1'b0;
        tol   = '0;
      end
    endcase
  end

endmodule
