// tb_pbit: checks one p-bit, statically and statistically.
//
// 1. Cold (V_temp = 1000 mV) with a strong bias the spin follows the bias sign.
// 2. Couplings: with the bias off, a strong positive weight to a neighbour makes the spin copy
//    the neighbour; a negative weight makes it the opposite; disabling the input removes it.
// 3. The spin flip-flop only changes on update strobes.
// 4. Sigmoid: with random bytes drawn here, the fraction of +1 decisions at several biases and
//    temperatures must match P = 1/2 + y/(2R) (clipped to [0, 1]), with y the ideal tanh output
//    computed here in floating point and R the random current's full scale, within 0.05.
module tb_pbit;
  import pchip_pkg::*;
  logic       clk = 0, rst_n = 0, upd = 0;
  diff_cur_t  i_w [FANIN];
  logic       m_nbr [FANIN];
  weight_t    h;
  logic [7:0] prbs;
  logic [3:0] scale_h = 4'd1, scale_rng = 4'd1;
  cur_t       i_tail = cur_t'(160);
  logic [9:0] vtemp_mv = 10'd1000;
  logic       m, m_n;
  int checks = 0, failures = 0;

  pbit dut (.clk, .rst_n, .upd, .i_w, .m_nbr, .h, .prbs, .scale_h, .scale_rng, .i_tail,
            .vtemp_mv, .m, .m_n);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // one update with a random byte; returns the new spin
  task automatic step(output logic s);
    @(negedge clk);
    prbs = 8'($urandom);
    upd = 1;
    @(negedge clk);
    upd = 0;
    s = m;
  endtask

  task automatic set_w(input int k, input int w);
    logic [7:0] c, cn;
    c  = dac_code(8'(w));
    cn = ~c;
    i_w[k].p = cur_t'(c);            // scale 1
    i_w[k].n = cur_t'(cn);
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic s;
    for (int k = 0; k < FANIN; k++) begin i_w[k] = '{p: '0, n: '0}; m_nbr[k] = 0; end
    h = '{en: 1'b0, w: 8'd0};
    prbs = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(m == 0 && m_n == 1, "reset spin");
    // 1. strong bias, cold
    h = '{en: 1'b1, w: 8'sd100};
    for (int t = 0; t < 50; t++) begin step(s); check(s == 1, "positive bias"); end
    h = '{en: 1'b1, w: -8'sd100};
    for (int t = 0; t < 50; t++) begin step(s); check(s == 0, "negative bias"); end
    // 2. couplings
    h = '{en: 1'b0, w: 8'sd0};
    for (int k = 0; k < FANIN; k++) begin
      for (int t = 0; t < 20; t++) begin
        bit nb;
        nb = 1'($urandom);
        m_nbr[k] = nb;
        set_w(k, 100);
        step(s); check(s == nb, $sformatf("ferro input %0d", k));
        set_w(k, -100);
        step(s); check(s == !nb, $sformatf("anti-ferro input %0d", k));
      end
      i_w[k] = '{p: '0, n: '0};
    end
    // 3. hold without update
    h = '{en: 1'b1, w: 8'sd100};
    step(s);
    h = '{en: 1'b1, w: -8'sd100};
    repeat (5) begin
      @(negedge clk);
      check(m == 1, "hold without update");
    end
    // 4. sigmoid statistics
    foreach (m_nbr[k]) m_nbr[k] = 0;
    for (int vt = 0; vt < 2; vt++) begin
      vtemp_mv = (vt == 0) ? 10'd764 : 10'd900;
      for (int b = -60; b <= 60; b += 20) begin
        int ones;
        real beta, y, pexp, pm;
        h = '{en: 1'b1, w: 8'(b)};
        ones = 0;
        for (int t = 0; t < 2000; t++) begin step(s); ones += s; end
        beta = (real'(vtemp_mv) - 700.0) / 64.0;
        y = 160.0 * $tanh(beta * real'(2 * b + 1) / 256.0);
        // 2y + (2r - 255) > 0 for r uniform on 0..255
        pexp = 0.0;
        for (int r = 0; r < 256; r++) if (2.0 * y + real'(2 * r - 255) > 0.0) pexp += 1.0 / 256.0;
        pm = real'(ones) / 2000.0;
        check(pm - pexp < 0.05 && pexp - pm < 0.05,
              $sformatf("P(+1) at h=%0d vt=%0d: %f exp %f", b, vtemp_mv, pm, pexp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
