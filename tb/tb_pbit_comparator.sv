// tb_pbit_comparator: checks that the decision is 1 exactly when the summed positive current
// (tanh + random) exceeds the summed negative current, and that the outputs are complementary.
module tb_pbit_comparator;
  import pchip_pkg::*;
  diff_cur_t i_tanh, i_rng;
  logic m, m_n;
  int checks = 0, failures = 0;

  pbit_comparator dut (.i_tanh, .i_rng, .m, .m_n);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int a, b, c, d;
      a = $urandom_range(0, 5000); b = $urandom_range(0, 5000);
      c = $urandom_range(0, 4000); d = (t % 7 == 0) ? a + c - b : $urandom_range(0, 4000);
      if (d < 0) d = 0;
      i_tanh.p = cur_t'(a); i_tanh.n = cur_t'(b); i_rng.p = cur_t'(c); i_rng.n = cur_t'(d);
      #1;
      check(m == ((a + c) > (b + d)), $sformatf("decision %0d+%0d vs %0d+%0d", a, c, b, d));
      check(m_n == ~m, "complement");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
