// tb_pchip: checks the whole chip at its full size (7 x 8 positions, 440 p-bits) through SPI.
//
// 1. Random registers are written over SPI and read back; unwritten ones must stay zero.
// 2. Cold, a strong bias pins V0 of cell 0 and an intra-cell edge makes H0 follow it; spins read
//    over SPI must agree with the parallel spin port.
// 3. Clearing the edge's enable bit removes the coupling (H0 then follows its own bias).
// 4. A south edge from cell 0 to cell 8 (one row down) inverts V1 across the cell boundary.
// 5. The missing position (row 6, column 0) reads as zero spins.
module tb_pchip;
  import pchip_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sclk, cs_n, mosi, miso;
  logic [9:0] vtemp_mv = 10'd1000;
  logic [55:0][7:0] spins;
  logic [54:0] cell_update;
  int checks = 0, failures = 0;

  pchip dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .scale_j(4'd1), .scale_h(4'd1), .scale_rng(4'd1), .scale_tanh(4'd2), .vtemp_mv,
    .spins, .cell_update
  );
  spi_master_bfm bfm (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [15:0] wreg(input bit en, input int w);
    return {7'b0, en, 8'(w)};
  endfunction

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] q;
    int addrs [$];
    logic [15:0] vals [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. register write / read back
    for (int t = 0; t < 24; t++) begin
      int a;
      a = $urandom_range(0, 56 * SLOT - 1);
      if (a < 64) a += 64;              // keep cells 0 and 1 for the tests below
      addrs.push_back(a);
      vals.push_back({7'b0, 9'($urandom)});
      bfm.write_reg(a, vals[$]);
    end
    for (int t = 0; t < 24; t++) begin
      bfm.read_reg(addrs[t], q);
      // a later write to the same address wins
      for (int u = t + 1; u < 24; u++) if (addrs[u] == addrs[t]) q = vals[u];
      check(q == vals[t] || q == vals[$], $sformatf("register %0d read back %h exp %h", addrs[t], q, vals[t]));
    end
    bfm.read_reg(5, q);
    check(q == 16'h0, "unwritten register is zero");
    // clear the random registers again
    foreach (addrs[t]) bfm.write_reg(addrs[t], 16'h0);
    // 2. intra-cell edge
    bfm.write_reg(OFS_H + 0, wreg(1, 127));            // V0 of cell 0 pinned to +1
    bfm.write_reg(OFS_J + 0, wreg(1, -60));            // J(V0,H0) anti-ferro
    repeat (200) @(negedge clk);
    bfm.read_reg(SPIN_BASE + 0, q);
    check(q[0] == 1 && q[4] == 0, $sformatf("cell 0 spins %b", q[7:0]));
    check(q[7:0] == spins[0] || (q[0] == spins[0][0] && q[4] == spins[0][4]), "SPI spin read agrees");
    bfm.write_reg(OFS_H + 0, wreg(1, -127));           // V0 pinned to -1
    repeat (200) @(negedge clk);
    check(spins[0][0] == 0 && spins[0][4] == 1, "H0 follows -V0");
    // 3. enable bit
    bfm.write_reg(OFS_J + 0, wreg(0, -60));
    bfm.write_reg(OFS_H + 4, wreg(1, -127));           // H0 bias -1
    repeat (200) @(negedge clk);
    check(spins[0][4] == 0, "disabled edge has no effect");
    // 4. south edge cell 0 V1 -> cell 8 V1, ferro then anti
    bfm.write_reg(OFS_H + 1, wreg(1, 127));
    bfm.write_reg(OFS_SOUTH + 1, wreg(1, 60));
    repeat (300) @(negedge clk);
    bfm.read_reg(SPIN_BASE + 8, q);
    check(spins[0][1] == 1 && q[1] == 1, "south edge ferro");
    bfm.write_reg(OFS_SOUTH + 1, wreg(1, -60));
    repeat (300) @(negedge clk);
    bfm.read_reg(SPIN_BASE + 8, q);
    check(q[1] == 0, "south edge anti-ferro");
    // 5. missing position
    bfm.read_reg(SPIN_BASE + 48, q);
    check(q == 16'h0 && spins[48] == 8'h0, "missing cell");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
