// tb_picbnn_cell_row: self-checking test of one row of CAM bitcells.
// Writes random words through the word line, checks that the stored word only
// changes on a word-line write, and that the discharge vector equals the bitwise
// difference of stored word and searchline data; also checks that a column with
// both searchlines low never discharges the matchline.
module tb_picbnn_cell_row;
  localparam int unsigned COLS = 512;
  logic clk = 0, wl;
  logic [COLS-1:0] bl, sl, slb, d_q, ml_pd, shadow, q;
  int checks = 0, failures = 0;

  picbnn_cell_row #(.COLS(COLS)) dut (.clk, .wl, .bl, .sl, .slb, .d_q, .ml_pd);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    wl = 0; bl = '0; sl = '0; slb = '1;
    @(negedge clk); wl = 1; bl = rnd(); shadow = bl;
    @(negedge clk); wl = 0;
    for (int t = 0; t < 200; t++) begin
      if ($urandom_range(0, 2) == 0) begin
        wl = 1; bl = rnd(); shadow = bl;
      end else begin
        wl = 0; bl = rnd();
      end
      @(negedge clk); wl = 0;
      check(d_q == shadow, "stored word");
      q = rnd(); sl = q; slb = ~q; #1;
      check(ml_pd == (shadow ^ q), "mismatch vector");
      check($countones(ml_pd) == $countones(shadow ^ q), "mismatch count");
      // masked columns: both searchlines low
      sl = q & {COLS/2{2'b01}}; slb = ~q & {COLS/2{2'b01}}; #1;
      check(ml_pd == ((shadow ^ q) & {COLS/2{2'b01}}), "masked columns");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
