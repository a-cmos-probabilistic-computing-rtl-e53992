// tb_random_clock_bank: checks the 55 random clock enables.
//
// A serial reference of the two PRBS31 streams (same polynomial and seeds, computed bit by bit
// here) gives the expected streams; each enable must be the registered rising edge of its
// stream and each falling pulse its falling edge. Also checks that every random clock pulses at roughly a quarter of the cycles and
// never in two consecutive cycles.
module tb_random_clock_bank;
  localparam int N = 55;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] clk_en, clk_fall;
  int checks = 0, failures = 0;

  random_clock_bank #(.N_CLK(N)) dut (.clk, .rst_n, .clk_rise(clk_en), .clk_fall);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // serial reference generator: returns the next 32 bits, bit 0 first
  function automatic logic [31:0] ref_step(ref logic [30:0] s);
    logic [31:0] b;
    for (int k = 0; k < 32; k++) begin
      b[k] = s[30] ^ s[27];
      s = {s[29:0], b[k]};
    end
    return b;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [30:0] sa = 31'h2A3C_5E71, sb = 31'h13B7_09D5;
    logic [63:0] cur, prv;
    logic [N-1:0] exp_en, last_en;
    int cnt [N];
    for (int k = 0; k < N; k++) cnt[k] = 0;
    prv = '0;
    last_en = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // streams appear the cycle after the first edge; enables one cycle later
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(posedge clk);
      #1;
      if (cyc >= 1) begin
        exp_en = cur[N-1:0] & ~prv[N-1:0];
        check(clk_en == exp_en, $sformatf("enables at cycle %0d", cyc));
        check(clk_fall == (~cur[N-1:0] & prv[N-1:0]), $sformatf("falling edges at cycle %0d", cyc));
        check((clk_en & last_en) == '0, "two pulses in a row");
        for (int k = 0; k < N; k++) cnt[k] += clk_en[k];
        last_en = clk_en;
        prv = cur;
      end
      cur = {ref_step(sb), ref_step(sa)};
    end
    for (int k = 0; k < N; k++)
      check(cnt[k] > 800 && cnt[k] < 1200, $sformatf("rate of clock %0d: %0d/4000", k, cnt[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
