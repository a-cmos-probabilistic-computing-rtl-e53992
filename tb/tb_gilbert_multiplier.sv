// tb_gilbert_multiplier: checks that the multiplier passes the weight for spin +1, crosses it
// for spin -1 (negating the differential value), and cuts off an invalid spin pair.
module tb_gilbert_multiplier;
  import pchip_pkg::*;
  diff_cur_t i_w, i_out;
  logic m, m_n;
  int checks = 0, failures = 0;

  gilbert_multiplier dut (.i_w, .m, .m_n, .i_out);

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
    for (int t = 0; t < 1000; t++) begin
      int s, diff_in;
      i_w.p = cur_t'($urandom_range(0, 4000));
      i_w.n = cur_t'($urandom_range(0, 4000));
      m = 1'($urandom);
      m_n = (t % 10 == 9) ? m : ~m;
      #1;
      diff_in = int'(i_w.p) - int'(i_w.n);
      if (m_n == m) begin
        check(i_out.p == 0 && i_out.n == 0, "invalid spin pair");
      end else begin
        s = m ? 1 : -1;
        check(int'(i_out.p) - int'(i_out.n) == s * diff_in, $sformatf("product, m=%b", m));
        check(int'(i_out.p) + int'(i_out.n) == int'(i_w.p) + int'(i_w.n), "common mode kept");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
