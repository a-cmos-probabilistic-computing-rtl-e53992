// tb_tanh_wta: checks the tanh stage against a floating-point tanh.
//
// For random coupling and bias currents, temperatures and tail currents the differential output
// must be 2 * i_tail * tanh(beta * x / 256) within 1 % of the tail current, with
// x = sum of the input differences and beta = (V_temp - 700) / 64. The common mode must be the
// tail current, the output zero at V_temp <= 700 mV (infinite temperature), and the curve odd.
module tb_tanh_wta;
  import pchip_pkg::*;
  diff_cur_t  i_in [FANIN];
  diff_cur_t  i_bias, i_out;
  logic [9:0] vtemp_mv;
  cur_t       i_tail;
  int checks = 0, failures = 0;

  tanh_wta dut (.i_in, .i_bias, .vtemp_mv, .i_tail, .i_out);

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
      int x, tail;
      real beta, ey, y;
      x = 0;
      for (int k = 0; k < FANIN; k++) begin
        i_in[k].p = cur_t'($urandom_range(0, 600));
        i_in[k].n = cur_t'($urandom_range(0, 600));
        x += int'(i_in[k].p) - int'(i_in[k].n);
      end
      i_bias.p = cur_t'($urandom_range(0, 600));
      i_bias.n = cur_t'($urandom_range(0, 600));
      x += int'(i_bias.p) - int'(i_bias.n);
      vtemp_mv = 10'($urandom_range(650, 1000));
      tail = 128 * $urandom_range(1, 15);
      i_tail = cur_t'(tail);
      #1;
      beta = (vtemp_mv > 700) ? (real'(vtemp_mv) - 700.0) / 64.0 : 0.0;
      ey = real'(tail) * $tanh(beta * real'(x) / 256.0);
      y  = real'(int'(i_out.p) - int'(i_out.n)) / 2.0;
      check(y - ey < 0.01 * tail + 1.0 && ey - y < 0.01 * tail + 1.0,
            $sformatf("x=%0d vt=%0d tail=%0d: y=%f exp %f", x, vtemp_mv, tail, y, ey));
      check(int'(i_out.p) + int'(i_out.n) == 2 * tail, "common mode");
      if (vtemp_mv <= 700) check(i_out.p == i_out.n, "zero gain when hot");
    end
    // odd symmetry
    for (int t = 0; t < 200; t++) begin
      int d1;
      for (int k = 0; k < FANIN; k++) begin i_in[k].p = '0; i_in[k].n = '0; end
      i_bias.p = cur_t'($urandom_range(0, 3000)); i_bias.n = '0;
      vtemp_mv = 10'd900; i_tail = cur_t'(1280);
      #1 d1 = int'(i_out.p) - int'(i_out.n);
      i_bias.n = i_bias.p; i_bias.p = '0;
      #1 check(int'(i_out.p) - int'(i_out.n) == -d1, "odd function");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
