// picbnn_bank: one 32-kbit PiC-BNN bank, 64 rows x 512 bitcells.
//
// The bank holds one weight vector per row. A search loads the query into the
// search data register (s_load high at a rising edge); during the following
// cycle every row's matchline is evaluated against it. The bank reports, for
// each row, how many of its cells open an ML discharge path: the mismatch
// count, i.e. the Hamming distance between query and row. In silicon this
// number is never formed digitally; it is the analog discharge strength of the
// ML that the sense amplifiers compare against Vref at the sampling instant.
// The count is kept as a number here so that banks can be joined into wider
// words and so that the sense decision can be modelled exactly.
//
// Interface: write and read requests go to the write drivers (one row per
// cycle, read data one cycle later). ml_cnt is combinational from the stored
// words and the search data register, so it is valid in the cycle after s_load.
//
// The row/column organisation, the bitcell and the peripheral blocks follow
// the published bank; the matchline precharge is implied (every search starts
// from a charged ML) and the count representation of the ML is this model's.
module picbnn_bank #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 512,
  localparam int unsigned AW  = $clog2(ROWS),
  localparam int unsigned CW  = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // write / read port
  input  logic            we,
  input  logic            re,
  input  logic [AW-1:0]   addr,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] rdata,
  output logic            rvalid,
  // search port
  input  logic            s_load,
  input  logic [COLS-1:0] s_query,
  output logic [CW-1:0]   ml_cnt [ROWS]
);

  logic [ROWS-1:0] wl;
  logic [COLS-1:0] bl;
  logic [COLS-1:0] sl, slb;
  logic [COLS-1:0] row_d  [ROWS];
  logic [COLS-1:0] row_pd [ROWS];

  picbnn_write_driver #(.ROWS(ROWS), .COLS(COLS)) u_wr (
    .clk, .rst_n, .we, .re, .addr, .wdata,
    .wl, .bl, .row_d, .rdata, .rvalid
  );

  picbnn_sl_driver #(.COLS(COLS)) u_sl (
    .clk, .rst_n, .load(s_load), .query(s_query), .sl, .slb
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    picbnn_cell_row #(.COLS(COLS)) u_row (
      .clk, .wl(wl[r]), .bl, .sl, .slb, .d_q(row_d[r]), .ml_pd(row_pd[r])
    );
    // Matchline: number of open discharge paths in the row
    assign ml_cnt[r] = CW'($countones(row_pd[r]));
  end

endmodule
