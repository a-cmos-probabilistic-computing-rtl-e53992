// prbs31_gen: 2^31-1 pseudo-random bit sequence generator with 32 parallel outputs.
//
// A 31-bit Fibonacci LFSR for x^31 + x^28 + 1, decimated by 32: each enabled clock advances
// the register 32 steps at once, so every one of the 32 output bits carries a fresh
// pseudo-random value on every update. out[k] is the bit produced at step k of the update
// (out[0] first in sequence order); the outputs are registered and change one cycle after
// an enabled clock edge. The chip uses two such generators as sources of 64 pseudo-random
// clocks and one inside each Chimera cell for the p-bits' random numbers.
//
// From the paper: the 2^31-1 length, 32 outputs, and a new value in every bit position every
// update. This design's choices: the tap polynomial (the common PRBS31 one), the clock enable
// (the cell generators are clocked by a pseudo-random clock, modelled as an enable on the
// system clock), and the reset seed.
module prbs31_gen #(
  parameter int unsigned  N_OUT = 32,
  parameter logic [30:0]  SEED  = 31'h5EED_0001
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,      // advance N_OUT steps this cycle
  output logic [N_OUT-1:0] out
);

  logic [30:0] state;

  // Advance the LFSR N_OUT steps; collect the bit produced at each step.
  function automatic logic [31+N_OUT-1:0] step_n(input logic [30:0] s);
    logic [30:0]      st;
    logic [N_OUT-1:0] bits;
    logic             nb;
    st = s;
    for (int k = 0; k < int'(N_OUT); k++) begin
      nb      = st[30] ^ st[27];
      bits[k] = nb;
      st      = {st[29:0], nb};
    end
    return {st, bits};
  endfunction

  logic [30:0]      state_nxt;
  logic [N_OUT-1:0] out_nxt;
  always_comb {state_nxt, out_nxt} = step_n(state);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= (SEED == '0) ? 31'h1 : SEED;   // the all-zero state would lock up
      out   <= '0;
    end else if (en) begin
      state <= state_nxt;
      out   <= out_nxt;
    end
  end

endmodule
