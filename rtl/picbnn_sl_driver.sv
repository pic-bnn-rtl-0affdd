// picbnn_sl_driver: search data register and searchline drivers of one bank.
//
// When load is high at a rising clock edge the query (the input activations,
// 1 = +1, 0 = -1) is captured, and from then on drives SL with the query and
// SLbar with its complement, for every column of the bank. The lines hold
// their value until the next load, so one search can be issued every cycle.
// After reset the register holds all zeros (SL low, SLbar high).
//
// The search data registers and drivers are part of the published CAM
// organisation; the reset value is this design's choice.
module picbnn_sl_driver #(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [COLS-1:0] query,
  output logic [COLS-1:0] sl,
  output logic [COLS-1:0] slb
);

  logic [COLS-1:0] sdr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sdr <= '0;
    else if (load) sdr <= query;
  end

  assign sl  = sdr;
  assign slb = ~sdr;

endmodule
