// picbnn_array_cfg: logical arrangement of the four PiC-BNN banks.
//
// The banks (ROWS x COLS each) are arranged as a G-bank-wide word, with
// G = 1, 2 or 4 chosen by cfg: 256 x 512, 128 x 1024 or 64 x 2048 for the
// published bank size. Bank b belongs to row group b / G and holds slice b % G
// of the word. The block
//   - sends query slice (b % G) to bank b, so every row group sees the whole
//     logical query;
//   - joins the matchlines of the G banks of a row group: the mismatch count of
//     logical row (group * ROWS + r) is the sum of the counts of row r of the G
//     banks, as if their MLs were one wire;
//   - marks which logical rows exist in the arrangement (row_en).
// It is combinational.
//
// The three arrangements are published; how the banks are wired to form them
// (slice order, joined matchlines) is not described and is this design's
// choice: a wide word is evaluated as one matchline so that the sense decision
// is a threshold on the Hamming distance of the whole word.
module picbnn_array_cfg
  import picbnn_pkg::*;
#(
  parameter int unsigned NB   = 4,
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 512,
  localparam int unsigned CW  = $clog2(COLS + 1),
  localparam int unsigned LCW = $clog2(NB * COLS + 1)
) (
  input  cfg_e               cfg,
  input  logic [NB*COLS-1:0] query,              // logical query, bit 0 first
  output logic [COLS-1:0]    bank_query [NB],
  input  logic [CW-1:0]      bank_cnt   [NB][ROWS],
  output logic [LCW-1:0]     row_cnt    [NB*ROWS], // logical row mismatch count
  output logic [NB*ROWS-1:0] row_en
);

  int unsigned g;   // banks per word

  always_comb begin
    g = 1 << cfg;
    if (g > NB) g = NB;
    for (int b = 0; b < NB; b++)
      bank_query[b] = query[(b % g) * COLS +: COLS];
  end

  always_comb begin
    for (int lr = 0; lr < NB * ROWS; lr++) begin
      row_cnt[lr] = '0;
      row_en[lr]  = 1'b0;
    end
    for (int grp = 0; grp < NB; grp++) begin
      if (grp < NB / g) begin
        for (int r = 0; r < ROWS; r++) begin
          row_en[grp * ROWS + r] = 1'b1;
          for (int s = 0; s < NB; s++)
            if (s < g)
              row_cnt[grp * ROWS + r] = row_cnt[grp * ROWS + r] + LCW'(bank_cnt[grp * g + s][r]);
        end
      end
    end
  end

endmodule
