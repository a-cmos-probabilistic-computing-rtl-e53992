// tb_prbs31_gen: checks the decimated PRBS31 generator against the sequence recurrence.
//
// Every output bit must satisfy b[n] = b[n-31] XOR b[n-28] over the serial sequence, starting
// from the seed bits, with out[0] first. The enable is toggled at random; a disabled cycle must
// leave the outputs unchanged. Also checks the reset value and that the outputs are not stuck.
module tb_prbs31_gen;
  localparam logic [30:0] SEED = 31'h1234_5678;

  logic        clk = 0, rst_n = 0, en = 0;
  logic [31:0] out;
  int checks = 0, failures = 0;

  prbs31_gen #(.N_OUT(32), .SEED(SEED)) dut (.clk, .rst_n, .en, .out);

  always #5 clk = ~clk;

  bit hist[$];
  int ones = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] prev;
    for (int k = 30; k >= 0; k--) hist.push_back(SEED[k]);   // oldest first
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(out == 0, "reset value");
    for (int cyc = 0; cyc < 2000; cyc++) begin
      en = ($urandom_range(0, 3) != 0);
      prev = out;
      @(posedge clk);
      #1;
      if (en) begin
        for (int k = 0; k < 32; k++) begin
          bit exp_b;
          exp_b = hist[hist.size() - 31] ^ hist[hist.size() - 28];
          check(out[k] == exp_b, $sformatf("cycle %0d bit %0d", cyc, k));
          hist.push_back(out[k]);
          ones += out[k];
        end
        if (hist.size() > 64) hist = hist[hist.size()-64:$];
      end else begin
        check(out == prev, "hold when disabled");
      end
      @(negedge clk);
    end
    // balance: about half ones
    check(ones > 0, "not stuck at 0");
    $display("ones=%0d", ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
