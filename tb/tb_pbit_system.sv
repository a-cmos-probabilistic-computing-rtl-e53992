// tb_pbit_system: end-to-end run of the chip and its correlator at full size (440 p-bits).
//
// The bench plays the learning host: it programs the chip over SPI, reads registers and spins
// back, and uses the hardware correlator on cell 0 to measure averages and correlations.
// Mechanisms exercised and counted (each must happen at least once):
//   spi_write, spi_read_reg, spi_read_spin  - the SPI register protocol
//   cell_update                             - random clock pulses driving the p-bit updates
//   corr_run                                - complete correlator runs
//   hot_decorrelated                        - V_temp = 700 mV: a coupled pair is uncorrelated
//   coupling_sign                           - cold: <V0 H0> follows the sign of J
//   edge_disabled                           - the enable bit removes a coupling
//   sigmoid                                 - <m> rises monotonically with the bias (tanh curve)
//   anneal                                  - raising V_temp step by step lowers the Ising
//                                             energy of a random +-J problem on 8 cells
module tb_pbit_system;
  import pchip_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sclk, cs_n, mosi, miso;
  logic [9:0] vtemp_mv = 10'd1000;
  logic [55:0][7:0] spins;
  logic [54:0] cell_update;
  logic [7:0]  corr_cell = 8'd0;
  logic        corr_start = 0, corr_sample = 0;
  logic [14:0] corr_n_samples = 15'd400;
  logic        corr_busy, corr_done;
  logic signed [15:0] corr_sum_m [8];
  logic signed [15:0] corr_sum_c [8][8];
  int checks = 0, failures = 0;

  pbit_system dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .scale_j(4'd1), .scale_h(4'd1), .scale_rng(4'd1), .scale_tanh(4'd2), .vtemp_mv,
    .spins, .cell_update, .corr_cell, .corr_start, .corr_n_samples, .corr_sample,
    .corr_busy, .corr_done, .corr_sum_m, .corr_sum_c
  );
  spi_master_bfm bfm (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;

  // mechanism counters
  int n_spi_write = 0, n_spi_read_reg = 0, n_spi_read_spin = 0, n_cell_update = 0;
  int n_corr_run = 0, n_hot = 0, n_sign = 0, n_disabled = 0, n_sigmoid = 0, n_anneal = 0;

  always @(posedge clk) if (rst_n) n_cell_update += $countones(cell_update);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int addr, input bit en, input int w);
    bfm.write_reg(addr, {7'b0, en, 8'(w)});
    n_spi_write++;
  endtask

  // one correlator run on cell 0, one sample every 16 cycles
  task automatic correlate(input int n);
    corr_n_samples = 15'(n);
    @(negedge clk) corr_start = 1;
    @(negedge clk) corr_start = 0;
    while (!corr_done) begin
      repeat (15) @(negedge clk);
      corr_sample = 1;
      @(negedge clk) corr_sample = 0;
    end
    n_corr_run++;
  endtask

  // Ising energy of the programmed problem: E = -sum J s_i s_j - sum h s_i
  int jw [56*SLOT];
  function automatic int energy();
    int e;
    e = 0;
    for (int p = 0; p < 8; p++)
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          int si, sj;
          si = spins[p][i] ? 1 : -1;
          sj = spins[p][4 + j] ? 1 : -1;
          e -= jw[p*SLOT + OFS_J + 4*i + j] * si * sj;
        end
    for (int p = 0; p < 7; p++)
      for (int i = 0; i < 4; i++) begin
        int si, sj;
        si = spins[p][4 + i] ? 1 : -1;
        sj = spins[p + 1][4 + i] ? 1 : -1;
        e -= jw[p*SLOT + OFS_EAST + i] * si * sj;
      end
    return e;
  endfunction

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] q;
    foreach (jw[k]) jw[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // SPI read-back
    wr(OFS_J + 0, 1, 60);
    bfm.read_reg(OFS_J + 0, q); n_spi_read_reg++;
    check(q == {7'b0, 1'b1, 8'd60}, "register read back");

    // hot: coupled pair uncorrelated
    vtemp_mv = 10'd700;
    correlate(400);
    check(corr_sum_c[0][4] < 120 && corr_sum_c[0][4] > -120, $sformatf("hot <V0H0> %0d", corr_sum_c[0][4]));
    n_hot++;

    // cold: correlation follows the sign of J
    vtemp_mv = 10'd1000;
    correlate(400);
    check(corr_sum_c[0][4] > 320, $sformatf("cold ferro <V0H0> %0d", corr_sum_c[0][4]));
    n_sign++;
    wr(OFS_J + 0, 1, -60);
    correlate(400);
    check(corr_sum_c[0][4] < -320, $sformatf("cold anti-ferro <V0H0> %0d", corr_sum_c[0][4]));
    n_sign++;

    // disabled edge: uncorrelated even when cold
    wr(OFS_J + 0, 0, -60);
    correlate(400);
    check(corr_sum_c[0][4] < 120 && corr_sum_c[0][4] > -120, $sformatf("disabled <V0H0> %0d", corr_sum_c[0][4]));
    n_disabled++;

    // sigmoid: bias sweep of V1 at beta = 1 (V_temp = 764 mV)
    vtemp_mv = 10'd764;
    begin
      int prev;
      prev = -1000;
      for (int b = -120; b <= 120; b += 40) begin
        wr(OFS_H + 1, 1, b);
        correlate(300);
        check(int'(corr_sum_m[1]) >= prev - 30, $sformatf("sigmoid at bias %0d: %0d after %0d", b, corr_sum_m[1], prev));
        if (b == -120) check(corr_sum_m[1] < -150, "low end of the sigmoid");
        if (b == 120)  check(corr_sum_m[1] > 150, "high end of the sigmoid");
        prev = int'(corr_sum_m[1]);
        n_sigmoid++;
      end
      wr(OFS_H + 1, 0, 0);
    end

    // spin read over SPI agrees with the parallel port (cold, pinned node)
    vtemp_mv = 10'd1000;
    wr(OFS_H + 2, 1, 127);
    repeat (100) @(negedge clk);
    bfm.read_reg(SPIN_BASE + 0, q); n_spi_read_spin++;
    check(q[2] == 1 && spins[0][2] == 1, "spin read over SPI");
    wr(OFS_H + 2, 0, 0);

    // annealing a random +-J problem on the first row of cells (intra-cell and east edges)
    begin
      int e_hot, e_cold, e;
      for (int p = 0; p < 8; p++) begin
        for (int e2 = 0; e2 < 16; e2++) begin
          int w;
          w = $urandom_range(0, 1) ? 20 : -20;
          jw[p*SLOT + OFS_J + e2] = 2 * w + 1;      // DAC gives (2w + 1) LSB
          wr(p*SLOT + OFS_J + e2, 1, w);
        end
        if (p < 7) for (int i = 0; i < 4; i++) begin
          int w;
          w = $urandom_range(0, 1) ? 20 : -20;
          jw[p*SLOT + OFS_EAST + i] = 2 * w + 1;
          wr(p*SLOT + OFS_EAST + i, 1, w);
        end
      end
      vtemp_mv = 10'd700;
      e_hot = 0;
      repeat (50) begin repeat (20) @(negedge clk); e_hot += energy(); end
      e_hot /= 50;
      e_cold = e_hot;
      for (int v = 720; v <= 1000; v += 40) begin
        vtemp_mv = 10'(v);
        e = 0;
        repeat (50) begin repeat (20) @(negedge clk); e += energy(); end
        e /= 50;
        $display("anneal V_temp=%0d mV  <E>=%0d", v, e);
        e_cold = e;
        n_anneal++;
      end
      check(e_cold < e_hot - 1000, $sformatf("annealing lowers energy: hot %0d cold %0d", e_hot, e_cold));
    end

    check(n_spi_write > 0 && n_spi_read_reg > 0 && n_spi_read_spin > 0, "SPI mechanisms");
    check(n_cell_update > 0, "random clock updates");
    check(n_corr_run > 0, "correlator runs");
    check(n_hot > 0 && n_sign > 0 && n_disabled > 0 && n_sigmoid > 0 && n_anneal > 0, "experiments");
    $display("mechanisms: spi_write=%0d spi_read_reg=%0d spi_read_spin=%0d cell_update=%0d corr_run=%0d hot=%0d sign=%0d disabled=%0d sigmoid=%0d anneal=%0d",
             n_spi_write, n_spi_read_reg, n_spi_read_spin, n_cell_update, n_corr_run, n_hot, n_sign,
             n_disabled, n_sigmoid, n_anneal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
