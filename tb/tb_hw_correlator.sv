// tb_hw_correlator: checks the correlator against sums computed here.
//
// Several runs with random sample counts and random sample gaps; spins are drawn with
// correlations (some spins copy or invert others) so that the sums span their range. After done
// every sum_m[i] and sum_c[i][j] (i < j) must equal the bipolar sums over exactly n samples, the
// entries with i >= j must be zero, and samples given while idle must be ignored. The run must
// take exactly n sample cycles.
module tb_hw_correlator;
  localparam int N = 6;
  logic clk = 0, rst_n = 0, start = 0, sample = 0;
  logic [14:0] n_samples = '0;
  logic [N-1:0] spins = '0;
  logic busy, done;
  logic signed [15:0] sum_m [N];
  logic signed [15:0] sum_c [N][N];
  int checks = 0, failures = 0;

  hw_correlator #(.N(N), .CNT_W(16)) dut (.clk, .rst_n, .start, .n_samples, .sample, .spins,
                                          .busy, .done, .sum_m, .sum_c);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      int n, taken, em [N], ec [N][N];
      n = (run == 0) ? 1 : $urandom_range(2, 600);
      foreach (em[i]) em[i] = 0;
      foreach (ec[i, j]) ec[i][j] = 0;
      @(negedge clk) begin start = 1; n_samples = 15'(n); end
      @(negedge clk) start = 0;
      check(busy && !done, "busy after start");
      taken = 0;
      while (taken < n) begin
        sample = ($urandom_range(0, 2) != 0);
        spins = N'($urandom);
        spins[1] = spins[0];
        spins[3] = ~spins[2];
        if (sample) begin
          taken++;
          for (int i = 0; i < N; i++) begin
            em[i] += spins[i] ? 1 : -1;
            for (int j = i + 1; j < N; j++) ec[i][j] += (spins[i] == spins[j]) ? 1 : -1;
          end
        end
        @(negedge clk);
        if (taken < n) check(busy && !done, "still busy");
      end
      sample = 0;
      check(done && !busy, "done after n samples");
      // idle samples are ignored
      sample = 1; spins = '1;
      @(negedge clk) sample = 0;
      for (int i = 0; i < N; i++) begin
        check(sum_m[i] == 16'(em[i]), $sformatf("run %0d sum_m[%0d]=%0d exp %0d", run, i, sum_m[i], em[i]));
        for (int j = 0; j < N; j++)
          check(sum_c[i][j] == 16'((j > i) ? ec[i][j] : 0), $sformatf("run %0d sum_c[%0d][%0d]", run, i, j));
      end
      check(sum_c[0][1] == 16'(n) && sum_c[2][3] == -16'(n), "copied and inverted spins");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
