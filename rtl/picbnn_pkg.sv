// picbnn_pkg: constants and types shared by the PiC-BNN processing-in-CAM
// binary neural network array.
//
// The array holds 128 kbit in four banks of 64 rows x 512 bitcells. The four
// banks are logically arranged as one of three arrays (rows x word width):
// 256 x 512, 128 x 1024 or 64 x 2048. A search compares one query word with
// every row at once and reports, per row, whether the Hamming distance (HD)
// between query and row lies within a tolerance threshold. The bank size, the
// bank count and the three arrangements are the published ones; the encoding
// of the arrangement select and the threshold width are this design's choice.
package picbnn_pkg;

  parameter int unsigned NUM_BANKS = 4;
  parameter int unsigned BANK_ROWS = 64;
  parameter int unsigned BANK_COLS = 512;
  parameter int unsigned MAX_WIDTH = NUM_BANKS * BANK_COLS;  // 2048-bit widest word
  parameter int unsigned MAX_ROWS  = NUM_BANKS * BANK_ROWS;  // 256 rows in the tallest arrangement
  // HD tolerance threshold: 0 .. MAX_WIDTH
  parameter int unsigned HD_W      = $clog2(MAX_WIDTH + 1);
  // Supply-relative voltages are given in millivolts (0 .. 2047 mV)
  parameter int unsigned MV_W      = 11;

  // Logical arrangement of the four banks: rows x word width.
  // The numeric value is log2 of the number of banks joined into one word.
  typedef enum logic [1:0] {
    CFG_256X512  = 2'd0,
    CFG_128X1024 = 2'd1,
    CFG_64X2048  = 2'd2
  } cfg_e;

  // Word width, in bits, of an arrangement for a given bank width
  function automatic int unsigned cfg_width(cfg_e c, int unsigned cols);
    return cols << c;
  endfunction

endpackage
