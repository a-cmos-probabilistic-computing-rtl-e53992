// tb_rng_dac: checks the random current generator model: for every byte and a few scales the
// differential output must be (2*byte - 255) * scale, and over all 256 bytes the outputs must be
// uniform and symmetric (every level once, mean zero).
module tb_rng_dac;
  import pchip_pkg::*;
  logic [7:0] prbs, prbsn;
  logic [3:0] scale;
  diff_cur_t  i_out;
  int checks = 0, failures = 0;

  rng_dac dut (.prbs, .prbsn, .scale, .i_out);

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
    int sum, pos;
    for (int s = 1; s < 16; s += 3) begin
      sum = 0; pos = 0;
      for (int b = 0; b < 256; b++) begin
        prbs = 8'(b); prbsn = ~8'(b); scale = 4'(s);
        #1;
        check(int'(i_out.p) - int'(i_out.n) == (2 * b - 255) * s, $sformatf("byte %0d scale %0d", b, s));
        check(int'(i_out.p) == b * s, "positive branch");
        sum += int'(i_out.p) - int'(i_out.n);
        pos += (i_out.p > i_out.n);
      end
      check(sum == 0, "mean zero");
      check(pos == 128, "symmetric");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
