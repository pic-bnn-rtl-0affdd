// picbnn_cell_row: one word line of PiC-BNN bitcells sharing a matchline (ML).
//
// Each bitcell is an SRAM-based NOR-type CAM cell with an extra evaluation
// transistor in its ML discharge path. It stores one binary weight D (logic 1
// = +1, logic 0 = -1). During a search the searchlines carry the input
// activation on SL and its complement on SLbar; the cell's compare node is
// (D & SLbar) | (Dbar & SL), i.e. D XNOR SLbar, which is high exactly when the
// activation and the weight differ. That node turns on the cell's ML pull-down,
// so a row discharges its ML through as many paths as it has mismatching
// cells: the ML is an analog XNOR/POPCOUNT. The pull-down vector ml_pd is the
// digital image of those open paths; how fast they drain the ML (set by Veval)
// is left to the sense model.
//
// Interface: a write stores bl into all cells when wl is high at a rising clock
// edge (the SRAM core write, made synchronous here). d_q is the stored word
// (read path). ml_pd is combinational from the stored word and the searchlines.
// The cell's compare function follows the published bitcell; the clocked write
// and the absence of a reset (SRAM content is undefined at power-up) are this
// model's choices.
module picbnn_cell_row #(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            wl,     // word line (write enable of this row)
  input  logic [COLS-1:0] bl,     // write data from the write drivers
  input  logic [COLS-1:0] sl,     // searchlines
  input  logic [COLS-1:0] slb,    // complementary searchlines
  output logic [COLS-1:0] d_q,    // stored word
  output logic [COLS-1:0] ml_pd   // 1 = this cell opens an ML discharge path
);

  logic [COLS-1:0] d;

  always_ff @(posedge clk) begin
    if (wl) d <= bl;
  end

  assign d_q   = d;
  assign ml_pd = (d & slb) | (~d & sl);

endmodule
