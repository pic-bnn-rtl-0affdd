// tb_picbnn_sl_driver: self-checking test of the search data register and
// searchline drivers: reset value, capture on load, hold without load, and
// complementary SL / SLbar.
module tb_picbnn_sl_driver;
  localparam int unsigned COLS = 512;
  logic clk = 0, rst_n = 0, load;
  logic [COLS-1:0] query, sl, slb, held;
  int checks = 0, failures = 0;

  picbnn_sl_driver #(.COLS(COLS)) dut (.clk, .rst_n, .load, .query, .sl, .slb);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    load = 0; query = '0;
    repeat (2) @(negedge clk);
    check(sl == '0 && slb == '1, "reset value");
    rst_n = 1; held = '0;
    for (int t = 0; t < 300; t++) begin
      load = ($urandom_range(0, 2) != 0);
      for (int i = 0; i < COLS; i += 32) query[i +: 32] = $urandom;
      if (load) held = query;
      @(negedge clk);
      check(sl == held, "searchline value");
      check(slb == ~held, "complementary searchline");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
