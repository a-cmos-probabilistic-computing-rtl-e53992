// tb_weight_dac: checks the weight DAC model.
//
// For random codes and scales the two outputs must equal the binary-weighted sums of the
// switched branches (computed bit by bit here), and zero when disabled. For a two's-complement
// weight w driven as offset binary with complementary codes, I+ - I- must be (2w + 1) * scale.
module tb_weight_dac;
  import pchip_pkg::*;
  logic [7:0] j, jn;
  logic       en_n;
  logic [3:0] scale;
  diff_cur_t  i_out;
  int checks = 0, failures = 0;

  weight_dac dut (.j, .jn, .en_n, .scale, .i_out);

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
    for (int t = 0; t < 2000; t++) begin
      int ep, en;
      j = 8'($urandom); jn = 8'($urandom); en_n = ($urandom_range(0, 4) == 0);
      scale = 4'($urandom);
      #1;
      ep = 0; en = 0;
      for (int k = 0; k < 8; k++) begin
        if (j[k])  ep += (1 << k) * int'(scale);
        if (jn[k]) en += (1 << k) * int'(scale);
      end
      if (en_n) begin ep = 0; en = 0; end
      check(int'(i_out.p) == ep && int'(i_out.n) == en,
            $sformatf("j=%h jn=%h en_n=%b s=%0d -> %0d/%0d exp %0d/%0d", j, jn, en_n, scale,
                      i_out.p, i_out.n, ep, en));
    end
    for (int w = -128; w < 128; w++) begin
      logic [7:0] c;
      c = dac_code(8'(w));
      j = c; jn = ~c; en_n = 0; scale = 4'd3;
      #1;
      check(int'(i_out.p - i_out.n) == (2 * w + 1) * 3, $sformatf("signed weight %0d", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
