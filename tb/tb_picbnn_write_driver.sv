// tb_picbnn_write_driver: self-checking test of the row decoder / write drivers.
// Checks one-hot word lines for writes, no word line without a write, the
// bitline data, and the one-cycle read latency of the selected stored word.
module tb_picbnn_write_driver;
  localparam int unsigned ROWS = 64, COLS = 512, AW = $clog2(ROWS);
  logic clk = 0, rst_n = 0, we, re, rvalid;
  logic [AW-1:0] addr;
  logic [COLS-1:0] wdata, bl, rdata;
  logic [ROWS-1:0] wl;
  logic [COLS-1:0] row_d [ROWS];
  int checks = 0, failures = 0;

  picbnn_write_driver #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .we, .re, .addr, .wdata, .wl, .bl, .row_d, .rdata, .rvalid);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s t=%0t", what, $time); end
  endtask

  initial begin
    logic [AW-1:0] a;
    logic exp_rv;
    logic [COLS-1:0] exp_rd;
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < COLS; i += 32) row_d[r][i +: 32] = $urandom;
    we = 0; re = 0; addr = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1); re = ($urandom_range(0, 1) == 1);
      a = AW'($urandom); addr = a;
      for (int i = 0; i < COLS; i += 32) wdata[i +: 32] = $urandom;
      #1;
      check(wl == (we ? (ROWS'(1) << a) : '0), "word line decode");
      check(bl == wdata, "bitline data");
      exp_rv = re && !we; exp_rd = row_d[a];
      @(negedge clk);
      check(rvalid == exp_rv, "read valid");
      if (exp_rv) check(rdata == exp_rd, "read data");
      we = 0; re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
