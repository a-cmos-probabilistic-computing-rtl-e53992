// rng_dac: behavioural model of the random current generator.
//
// Behavioural model of an analog block: currents are signed integers in DAC LSB units.
// The same binary-weighted R-2R current source as the weight DAC, biased by V_biasRNG, is
// steered by a pseudo-random byte: branch k goes to I+_RNG when prbs[k] is 1 and to I-_RNG when
// prbsn[k] is 1. With prbsn the complement of prbs, I+ - I- = (2*prbs - 255) * scale, uniform
// over 256 levels between -255 and +255 times the scale (the P(x) box of the symbol).
// Combinational.
//
// From the paper: the circuit (PRBS<7:0>, PRBSN<7:0>, IDAC<7:0>, V_biasRNG) and the uniform
// distribution. This design's choice: scale is a 4-bit code standing for the RNG bias current.
module rng_dac
  import pchip_pkg::*;
(
  input  logic [7:0] prbs,
  input  logic [7:0] prbsn,
  input  logic [3:0] scale,     // V_biasRNG, from the bias generator
  output diff_cur_t  i_out      // I+_RNG, I-_RNG
);

  always_comb begin
    i_out.p = cur_t'(prbs)  * cur_t'(scale);
    i_out.n = cur_t'(prbsn) * cur_t'(scale);
  end

endmodule
