// picbnn_write_driver: row decoder, write drivers and read-out of one bank.
//
// A write request (we, addr, wdata) raises the word line of row addr for the
// clock edge that stores wdata into that row; the write data drive the bitlines
// of every column. A read request (re, addr) returns the stored word of row
// addr one cycle later on rdata with rvalid. Writes and reads are one per
// cycle; a write has priority over a read to the same cycle.
//
// The block is named in the published bank floorplan ("write drivers &
// circuitry") and reads and writes are said to work as in a plain 6T SRAM;
// the one-hot decoder, the registered one-cycle read and the request format
// are this design's own choices.
module picbnn_write_driver #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 512,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic            re,
  input  logic [AW-1:0]   addr,
  input  logic [COLS-1:0] wdata,
  output logic [ROWS-1:0] wl,                // one-hot word lines
  output logic [COLS-1:0] bl,                // bitline write data
  input  logic [COLS-1:0] row_d [ROWS],      // stored words of all rows
  output logic [COLS-1:0] rdata,
  output logic            rvalid
);

  always_comb begin
    wl = '0;
    if (we) wl[addr] = 1'b1;
  end

  assign bl = wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      rvalid <= re && !we;
      if (re && !we) rdata <= row_d[addr];
    end
  end

endmodule
