// tb_and_gate_learning: teaches one Chimera cell of the chip the truth table of an AND gate by
// contrastive divergence, with the host loop played by the bench.
//
// The three gate terminals sit on one cell: A = V0, B = V1, C = H0. The cell is bipartite, so the
// A-B coupling goes through a copy of B on H1 (B'), tied to B by a fixed ferromagnetic edge
// V1-H1 (code 40: strong enough that B' follows B, weak enough that the pair still flips; at 127
// the pair freezes); the edge V0-H1 then acts as J_AB. Learned parameters: J_AC (V0-H0), J_BC (V1-H0),
// J_AB (V0-H1) and the biases of A, B, C and B'.
//
// Each epoch the bench measures the model averages <m_i> and correlations <m_i m_j> with the
// chip's hardware correlator (one sample every 16 cycles) and moves every weight code by
// eta * (data statistic - model statistic), rounded and clipped to -127..127, then writes the
// changed registers over SPI. The data statistics are those of the four AND rows taken with
// equal weight: <A> = <B> = 0, <C> = -1/2, <AB> = 0, <AC> = <BC> = 1/2.
// The temperature is fixed (V_temp = 1000 mV) and scale_tanh = scale_rng, the ideal p-bit law.
//
// Checks: before learning the four valid rows hold about half of the probability; after learning
// they hold at least 75 %, each valid row at least 10 %, and the largest error of the matched
// statistics has fallen below 0.2. The learning rule and the embedding are this bench's own; the
// run uses a 1 x 2 grid with its second position empty, which leaves a single cell.
module tb_and_gate_learning;
  import pchip_pkg::*;
  localparam int R = 1, C = 2;
  localparam int EPOCHS = 40, NS = 1000;
  localparam real ETA = 16.0;
  logic clk = 0, rst_n = 0;
  logic sclk, cs_n, mosi, miso;
  logic [R*C-1:0][7:0] spins;
  logic [R*C-2:0] cell_update;
  logic        corr_start = 0, corr_sample = 0;
  logic [14:0] corr_n_samples = 15'(NS);
  logic        corr_busy, corr_done;
  logic signed [15:0] corr_sum_m [8];
  logic signed [15:0] corr_sum_c [8][8];
  int checks = 0, failures = 0;

  pbit_system #(.ROWS(R), .COLS(C), .ABSENT_ROW(0), .ABSENT_COL(1)) dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .scale_j(4'd1), .scale_h(4'd1), .scale_rng(4'd1), .scale_tanh(4'd1), .vtemp_mv(10'd1000),
    .spins, .cell_update, .corr_cell(8'd0), .corr_start, .corr_n_samples, .corr_sample,
    .corr_busy, .corr_done, .corr_sum_m, .corr_sum_c
  );
  spi_master_bfm bfm (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // learned parameters and their register offsets
  localparam int NPAR = 7;
  localparam int ADDR [NPAR] = '{OFS_J + 0, OFS_J + 4, OFS_J + 1,           // J_AC, J_BC, J_AB
                                 OFS_H + 0, OFS_H + 1, OFS_H + 4, OFS_H + 5}; // h_A, h_B, h_C, h_B'
  localparam real TARGET [NPAR] = '{0.5, 0.5, 0.0, 0.0, 0.0, -0.5, 0.0};
  int par [NPAR];

  task automatic wr(input int addr, input int w);
    bfm.write_reg(addr, {7'b0, 1'b1, 8'(w)});
  endtask

  task automatic correlate();
    @(negedge clk) corr_start = 1;
    @(negedge clk) corr_start = 0;
    while (!corr_done) begin
      repeat (15) @(negedge clk);
      corr_sample = 1;
      @(negedge clk) corr_sample = 0;
    end
  endtask

  // model statistics in the order of par[]
  function automatic void model_stats(output real s [NPAR]);
    s[0] = real'(corr_sum_c[0][4]) / NS;
    s[1] = real'(corr_sum_c[1][4]) / NS;
    s[2] = real'(corr_sum_c[0][5]) / NS;
    s[3] = real'(corr_sum_m[0]) / NS;
    s[4] = real'(corr_sum_m[1]) / NS;
    s[5] = real'(corr_sum_m[4]) / NS;
    s[6] = real'(corr_sum_m[5]) / NS;
  endfunction

  // fraction of samples showing a valid AND row, and the smallest valid-row fraction
  task automatic histogram(output real valid, output real min_row);
    int cnt [8];
    foreach (cnt[k]) cnt[k] = 0;
    for (int t = 0; t < 2000; t++) begin
      repeat (16) @(negedge clk);
      cnt[{spins[0][0], spins[0][1], spins[0][4]}]++;
    end
    // rows A B C: 000, 010, 100, 111
    valid = real'(cnt[0] + cnt[2] + cnt[4] + cnt[7]) / 2000.0;
    min_row = real'(cnt[0]);
    foreach (cnt[k]) if ((k == 2 || k == 4 || k == 7) && real'(cnt[k]) < min_row) min_row = real'(cnt[k]);
    min_row = min_row / 2000.0;
    $display("rows ABC: 000=%0d 001=%0d 010=%0d 011=%0d 100=%0d 101=%0d 110=%0d 111=%0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6], cnt[7]);
  endtask

  initial begin
    real s [NPAR];
    real valid, min_row, err, err0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (par[k]) begin par[k] = 0; wr(ADDR[k], 0); end
    wr(OFS_J + 5, 40);                       // B' copies B
    repeat (100) @(negedge clk);
    histogram(valid, min_row);
    check(valid > 0.3 && valid < 0.7, $sformatf("untrained valid fraction %0.2f", valid));
    err0 = 0.0;
    for (int ep = 0; ep < EPOCHS; ep++) begin
      correlate();
      model_stats(s);
      err = 0.0;
      for (int k = 0; k < NPAR; k++) begin
        real d;
        d = TARGET[k] - s[k];
        if (d > err) err = d;
        if (-d > err) err = -d;
        par[k] += $rtoi(ETA * d + (d >= 0.0 ? 0.5 : -0.5));
        if (par[k] > 127) par[k] = 127;
        if (par[k] < -127) par[k] = -127;
        wr(ADDR[k], par[k]);
      end
      if (ep == 0) err0 = err;
      if (ep % 8 == 0 || ep == EPOCHS - 1)
        $display("epoch %0d: max error %0.3f  J_AC=%0d J_BC=%0d J_AB=%0d h_A=%0d h_B=%0d h_C=%0d h_B'=%0d",
                 ep, err, par[0], par[1], par[2], par[3], par[4], par[5], par[6]);
    end
    check(err0 > 0.3, $sformatf("initial statistics error %0.3f", err0));
    check(err < 0.2, $sformatf("final statistics error %0.3f", err));
    histogram(valid, min_row);
    check(valid >= 0.75, $sformatf("trained valid fraction %0.2f", valid));
    check(min_row >= 0.10, $sformatf("smallest valid row %0.2f", min_row));
    check(par[0] > 0 && par[1] > 0 && par[5] < 0, "learned signs J_AC, J_BC > 0, h_C < 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
