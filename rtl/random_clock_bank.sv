// random_clock_bank: the chip-level source of pseudo-random clocks.
//
// Two 2^31-1 PRBS generators with 32 outputs each run on the system clock and together give
// 64 independent pseudo-random bit streams. Stream k is the "random clock" of Chimera cell k;
// 55 of the 64 are used. A rising edge of a stream (0 in the previous cycle, 1 now) is a rising
// clock edge of that cell and gives a one-cycle pulse on clk_rise; a falling edge gives a pulse
// on clk_fall. Both are registered and each comes at an average rate of one in four cycles;
// rising and falling pulses of one stream alternate.
//
// From the paper: two PRBS generators, 64 random clocks of which 55 are used, 100-200 MHz system
// clock. This design's choices: the seeds, and turning each random clock into an enable pulse
// on the system clock so that the design stays single-clock.
module random_clock_bank #(
  parameter int unsigned N_CLK = 55
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [N_CLK-1:0] clk_rise,  // one-cycle pulse at each rising edge of random clock k
  output logic [N_CLK-1:0] clk_fall   // one-cycle pulse at each falling edge of random clock k
);

  initial assert (N_CLK >= 1 && N_CLK <= 64) else $error("random_clock_bank: N_CLK must be 1..64");

  logic [63:0]      streams;
  logic [N_CLK-1:0] streams_q;

  prbs31_gen #(.N_OUT(32), .SEED(31'h2A3C_5E71)) u_gen_a (
    .clk, .rst_n, .en(1'b1), .out(streams[31:0])
  );
  prbs31_gen #(.N_OUT(32), .SEED(31'h13B7_09D5)) u_gen_b (
    .clk, .rst_n, .en(1'b1), .out(streams[63:32])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      streams_q <= '0;       // the generators' outputs also reset to 0
      clk_rise  <= '0;
      clk_fall  <= '0;
    end else begin
      streams_q <= streams[N_CLK-1:0];
      clk_rise  <= streams[N_CLK-1:0] & ~streams_q;
      clk_fall  <= ~streams[N_CLK-1:0] & streams_q;
    end
  end

endmodule
