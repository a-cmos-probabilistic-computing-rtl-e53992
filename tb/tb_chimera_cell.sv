// tb_chimera_cell: checks one 4:4 Chimera unit cell.
//
// 1. Random-byte routing: at V_temp = 700 mV (beta = 0) with all weights off, a spin is +1
//    exactly when its random byte is >= 128. A serial PRBS31 reference computed here gives the
//    bytes: a rising pulse sets vertical node k to bit 8k+7 of the PRBS word and then advances
//    the PRBS; the following falling pulse sets horizontal node k (reversed byte) to bit 8k of
//    the new word.
// 2. Intra-cell edges, cold: V_i held by a strong bias drives H_j through J(V_i, H_j) with the
//    weight's sign, and a disabled edge has no effect.
// 3. Inter-cell inputs: the north/south/west/east currents and spins reach the right node.
// 4. Vertical spins change only on clk_rise, horizontal ones only on clk_fall.
module tb_chimera_cell;
  import pchip_pkg::*;
  localparam logic [30:0] SEED = 31'h0ACE_1234;
  logic       clk = 0, rst_n = 0, clk_rise = 0, clk_fall = 0;
  weight_t    w_j [HALF*HALF];
  weight_t    w_h [NODES_PER_CELL];
  diff_cur_t  ext_i [NODES_PER_CELL][2];
  logic       ext_m [NODES_PER_CELL][2];
  logic [9:0] vtemp_mv = 10'd700;
  logic [7:0] m;
  int checks = 0, failures = 0;

  chimera_cell #(.SEED(SEED)) dut (
    .clk, .rst_n, .clk_rise, .clk_fall, .w_j, .w_h, .ext_i, .ext_m,
    .scale_j(4'd1), .scale_h(4'd1), .scale_rng(4'd1), .i_tail(cur_t'(192)), .vtemp_mv, .m
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] ref_step(ref logic [30:0] s);
    logic [31:0] b;
    for (int k = 0; k < 32; k++) begin
      b[k] = s[30] ^ s[27];
      s = {s[29:0], b[k]};
    end
    return b;
  endfunction

  task automatic rise();
    @(negedge clk) clk_rise = 1;
    @(negedge clk) clk_rise = 0;
  endtask
  task automatic fall();
    @(negedge clk) clk_fall = 1;
    @(negedge clk) clk_fall = 0;
  endtask
  task automatic pulse();
    rise();
    fall();
  endtask

  function automatic diff_cur_t wcur(input int w);
    logic [7:0] c, cn;
    c = dac_code(8'(w)); cn = ~c;
    return '{p: cur_t'(c), n: cur_t'(cn)};
  endfunction

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [30:0] s = SEED;
    logic [31:0] word = '0;
    foreach (w_j[e]) w_j[e] = '0;
    foreach (w_h[n]) w_h[n] = '0;
    foreach (ext_i[n, k]) begin ext_i[n][k] = '{p: '0, n: '0}; ext_m[n][k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. routing
    for (int t = 0; t < 300; t++) begin
      logic [3:0] h_before;
      h_before = m[7:4];
      rise();
      for (int k = 0; k < 4; k++)
        check(m[k] == word[8*k+7], $sformatf("vertical node %0d byte routing", k));
      check(m[7:4] == h_before, "horizontal side holds on a rising edge");
      word = ref_step(s);
      fall();
      for (int k = 0; k < 4; k++)
        check(m[4+k] == word[8*k], $sformatf("horizontal node %0d reversed byte", k));
      if (t % 50 == 0) begin
        logic [7:0] held;
        held = m;
        repeat (3) @(negedge clk);
        check(m == held, "no change without clk_en");
      end
    end
    // 2. intra-cell edges, cold
    vtemp_mv = 10'd1000;
    for (int t = 0; t < 40; t++) begin
      int i, j, sgn;
      i = $urandom_range(0, 3); j = $urandom_range(0, 3);
      sgn = $urandom_range(0, 1) ? 1 : -1;
      foreach (w_j[e]) w_j[e] = '0;
      foreach (w_h[n]) w_h[n] = '0;
      w_h[i] = '{en: 1'b1, w: 8'(sgn > 0 ? 127 : -127)};    // pin V_i to +1 or -1
      w_j[4*i + j] = '{en: 1'b1, w: 8'(60)};                // ferro edge V_i - H_j
      pulse(); pulse();
      check(m[i] == (sgn > 0), "biased vertical node");
      check(m[4 + j] == m[i], $sformatf("ferro edge V%0d-H%0d", i, j));
      w_j[4*i + j] = '{en: 1'b1, w: 8'(-60)};
      pulse(); pulse();
      check(m[4 + j] == !m[i], $sformatf("anti-ferro edge V%0d-H%0d", i, j));
      // disabled edge: H_j gets only its bias
      w_j[4*i + j] = '{en: 1'b0, w: 8'(-100)};
      w_h[4 + j] = '{en: 1'b1, w: 8'(sgn > 0 ? 100 : -100)};
      pulse(); pulse();
      check(m[4 + j] == (sgn > 0), "disabled edge has no effect");
    end
    // 3. inter-cell inputs
    foreach (w_j[e]) w_j[e] = '0;
    foreach (w_h[n]) w_h[n] = '0;
    for (int t = 0; t < 64; t++) begin
      int n, k;
      bit nb;
      n = $urandom_range(0, 7); k = $urandom_range(0, 1); nb = 1'($urandom);
      ext_i[n][k] = wcur(100);
      ext_m[n][k] = nb;
      pulse();
      check(m[n] == nb, $sformatf("external input %0d of node %0d", k, n));
      ext_i[n][k] = wcur(-100);
      pulse();
      check(m[n] == !nb, $sformatf("negative external input %0d of node %0d", k, n));
      ext_i[n][k] = '{p: '0, n: '0};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
