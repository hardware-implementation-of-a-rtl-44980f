// tb_polar_pe: exhaustive check of the 7-bit PE over every pair of inputs
// in -63..63, both partial-sum values and both functions, against integer
// min-sum f and saturated g.
module tb_polar_pe;
  import vlc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic signed [6:0] a, b, y;
  logic u, g_sel;

  polar_pe dut (.*);

  initial begin
    for (int ia = -63; ia <= 63; ia++)
      for (int ib = -63; ib <= 63; ib++)
        for (int m = 0; m < 4; m++) begin
          int e;
          a = 7'(ia); b = 7'(ib); g_sel = m[1]; u = m[0];
          #1;
          e = g_sel ? sat7(u ? ib - ia : ib + ia) : f_ms(ia, ib);
          checks++;
          if (int'(y) != e) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d u=%0d g=%0d got %0d exp %0d", ia, ib, u, g_sel, y, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
