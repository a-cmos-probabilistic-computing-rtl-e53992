// tb_chimera_array: checks the array wiring on a 2 x 3 grid with the bottom-right cell missing.
//
// Cold, with biases pinning a source node and one inter-cell edge enabled:
//   - vertical node i of cell (0,c) drives vertical node i of cell (1,c) through its south edge,
//   - horizontal node i of cell (r,c) drives horizontal node i of cell (r,c+1) through its east
//     edge, in both cases with the sign of the weight;
//   - the same edges also work backwards (lower cell drives upper, right cell drives left), so
//     both ends of each edge see the right neighbour;
//   - an edge towards the missing cell has no effect and the missing cell reads as zeros.
// Hot (beta = 0) with all weights off, every spin must toggle and the cells must not all show
// the same pattern (distinct PRBS seeds); every present cell must get random clock pulses.
module tb_chimera_array;
  import pchip_pkg::*;
  localparam int R = 2, C = 3, NP = R * C;
  logic clk = 0, rst_n = 0;
  weight_t w [NP*SLOT];
  logic [9:0] vtemp_mv = 10'd1000;
  logic [NP-1:0][7:0] spins;
  logic [NP-2:0] cell_update;
  int checks = 0, failures = 0;

  chimera_array #(.ROWS(R), .COLS(C), .ABSENT_ROW(1), .ABSENT_COL(2)) dut (
    .clk, .rst_n, .w, .scale_j(4'd1), .scale_h(4'd1), .scale_rng(4'd1), .i_tail(cur_t'(192)),
    .vtemp_mv, .spins, .cell_update
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic clear();
    foreach (w[k]) w[k] = '0;
  endtask

  task automatic settle();
    repeat (150) @(negedge clk);
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pulses [NP-1];
  always @(posedge clk) if (rst_n) for (int k = 0; k < NP - 1; k++) pulses[k] += cell_update[k];

  initial begin
    foreach (pulses[k]) pulses[k] = 0;
    clear();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // south edges (0,c) -> (1,c), c = 0, 1
    for (int t = 0; t < 16; t++) begin
      int c, i, sb, sw;
      c = $urandom_range(0, 1); i = $urandom_range(0, 3);
      sb = $urandom_range(0, 1); sw = $urandom_range(0, 1);
      clear();
      w[c*SLOT + OFS_H + i]     = '{en: 1'b1, w: 8'(sb ? 127 : -127)};
      w[c*SLOT + OFS_SOUTH + i] = '{en: 1'b1, w: 8'(sw ? 60 : -60)};
      settle();
      check(spins[c][i] == 1'(sb), "source vertical node");
      check(spins[C + c][i] == 1'(sb ~^ sw), $sformatf("south edge cell %0d node %0d", c, i));
    end
    // east edges (r,c) -> (r,c+1)
    for (int t = 0; t < 16; t++) begin
      int r, c, i, sb, sw, p;
      r = $urandom_range(0, 1); c = (r == 1) ? 0 : $urandom_range(0, 1);
      i = $urandom_range(0, 3); sb = $urandom_range(0, 1); sw = $urandom_range(0, 1);
      p = r * C + c;
      clear();
      w[p*SLOT + OFS_H + 4 + i]  = '{en: 1'b1, w: 8'(sb ? 127 : -127)};
      w[p*SLOT + OFS_EAST + i]   = '{en: 1'b1, w: 8'(sw ? 60 : -60)};
      settle();
      check(spins[p][4 + i] == 1'(sb), "source horizontal node");
      check(spins[p + 1][4 + i] == 1'(sb ~^ sw), $sformatf("east edge cell %0d node %0d", p, i));
    end
    // the same edges driven from the other end: (1,c) -> (0,c) and (r,c+1) -> (r,c)
    for (int t = 0; t < 16; t++) begin
      int c, i, sb, sw;
      c = $urandom_range(0, 1); i = $urandom_range(0, 3);
      sb = $urandom_range(0, 1); sw = $urandom_range(0, 1);
      clear();
      w[(C + c)*SLOT + OFS_H + i] = '{en: 1'b1, w: 8'(sb ? 127 : -127)};
      w[c*SLOT + OFS_SOUTH + i]   = '{en: 1'b1, w: 8'(sw ? 60 : -60)};
      settle();
      check(spins[C + c][i] == 1'(sb), "source vertical node (lower)");
      check(spins[c][i] == 1'(sb ~^ sw), $sformatf("south edge backwards cell %0d node %0d", c, i));
    end
    for (int t = 0; t < 16; t++) begin
      int r, c, i, sb, sw, p;
      r = $urandom_range(0, 1); c = (r == 1) ? 0 : $urandom_range(0, 1);
      i = $urandom_range(0, 3); sb = $urandom_range(0, 1); sw = $urandom_range(0, 1);
      p = r * C + c;
      clear();
      w[(p + 1)*SLOT + OFS_H + 4 + i] = '{en: 1'b1, w: 8'(sb ? 127 : -127)};
      w[p*SLOT + OFS_EAST + i]        = '{en: 1'b1, w: 8'(sw ? 60 : -60)};
      settle();
      check(spins[p + 1][4 + i] == 1'(sb), "source horizontal node (right)");
      check(spins[p][4 + i] == 1'(sb ~^ sw), $sformatf("east edge backwards cell %0d node %0d", p, i));
    end
    // edges towards the missing cell (1,2) do nothing
    clear();
    w[2*SLOT + OFS_H + 0]     = '{en: 1'b1, w: 8'(40)};
    w[2*SLOT + OFS_SOUTH + 0] = '{en: 1'b1, w: 8'(-127)};
    w[4*SLOT + OFS_H + 4]     = '{en: 1'b1, w: 8'(40)};
    w[4*SLOT + OFS_EAST + 0]  = '{en: 1'b1, w: 8'(-127)};
    settle();
    check(spins[2][0] == 1 && spins[4][4] == 1, "no edge into the missing cell");
    check(spins[5] == 8'h00, "missing cell reads zero");
    // hot, free running
    begin
      int toggles [NP][8];
      logic [NP-1:0][7:0] prev;
      int same;
      clear();
      vtemp_mv = 10'd700;
      foreach (toggles[p, n]) toggles[p][n] = 0;
      prev = spins;
      same = 0;
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        for (int p = 0; p < NP; p++) for (int n = 0; n < 8; n++) toggles[p][n] += (spins[p][n] != prev[p][n]);
        if (spins[0] == spins[1] && spins[1] == spins[3]) same++;
        prev = spins;
      end
      for (int p = 0; p < NP - 1; p++) for (int n = 0; n < 8; n++)
        check(toggles[p][n] > 10, $sformatf("spin %0d.%0d toggles", p, n));
      check(same < 100, "cells differ");
      for (int k = 0; k < NP - 1; k++) check(pulses[k] > 50, $sformatf("random clock %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
