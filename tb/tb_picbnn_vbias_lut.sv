// tb_picbnn_vbias_lut: self-checking test of the voltage-to-threshold table.
// Checks all ten characterised (Vref, Veval, Vst) settings and random
// uncharacterised ones, including settings that differ from a table row in
// one voltage only.
module tb_picbnn_vbias_lut;
  import picbnn_pkg::*;
  logic [MV_W-1:0] vref_mv, veval_mv, vst_mv;
  logic known;
  logic [HD_W-1:0] tol;
  int checks = 0, failures = 0;
  logic clk = 0;
  int tab [10][4] = '{
    '{1200, 1200, 1200, 0}, '{750, 950, 1200, 4}, '{775, 600, 1200, 8},
    '{1175, 350, 1150, 12}, '{950, 525, 1100, 16}, '{1025, 475, 1000, 20},
    '{950, 500, 1025, 24}, '{775, 600, 1100, 28}, '{1175, 400, 1150, 32},
    '{1000, 475, 725, 36}};

  picbnn_vbias_lut dut (.vref_mv, .veval_mv, .vst_mv, .known, .tol);

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s %0d/%0d/%0d", what, vref_mv, veval_mv, vst_mv); end
  endtask

  function automatic int lookup(int a, int b, int c);
    for (int i = 0; i < 10; i++)
      if (tab[i][0] == a && tab[i][1] == b && tab[i][2] == c) return tab[i][3];
    return -1;
  endfunction

  initial begin
    int e;
    for (int i = 0; i < 10; i++) begin
      vref_mv = MV_W'(tab[i][0]); veval_mv = MV_W'(tab[i][1]); vst_mv = MV_W'(tab[i][2]);
      #1;
      check(known && 32'(tol) == tab[i][3], "table row");
      for (int k = 0; k < 3; k++) begin
        vref_mv = MV_W'(tab[i][0]); veval_mv = MV_W'(tab[i][1]); vst_mv = MV_W'(tab[i][2]);
        case (k)
          0: vref_mv += 25;
          1: veval_mv -= 25;
          default: vst_mv += 5;
        endcase
        #1;
        e = lookup(vref_mv, veval_mv, vst_mv);
        check(known == (e >= 0) && (e < 0 ? tol == 0 : 32'(tol) == e), "neighbour setting");
      end
    end
    for (int t = 0; t < 200; t++) begin
      vref_mv = MV_W'($urandom_range(700, 1200));
      veval_mv = MV_W'($urandom_range(300, 1200));
      vst_mv = MV_W'($urandom_range(700, 1200));
      #1;
      e = lookup(vref_mv, veval_mv, vst_mv);
      check(known == (e >= 0) && (e < 0 ? tol == 0 : 32'(tol) == e), "random setting");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
