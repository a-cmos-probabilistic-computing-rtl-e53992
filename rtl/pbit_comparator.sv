// pbit_comparator: behavioural model of the p-bit decision chain.
//
// Behavioural model of an analog block: currents are signed integers in DAC LSB units.
// The tanh output and the random current are summed on the two comparator input nodes (the
// current mirror of the p-bit copies the tanh current there), so the comparator sees
//     I+ = I+_TANH + I+_RNG,   I- = I-_TANH + I-_RNG.
// A winner-take-all current comparator turns the difference into a differential voltage and a
// self-biased fully differential voltage comparator amplifies it to rail-to-rail levels; the
// pair of inverters after it gives m and its complement mN. Together they compute
//     m = 1 (spin +1) when I+ > I-, else 0 (spin -1),
// which is eq. (2), sgn(tanh(beta I) + rand). Combinational.
//
// From the paper: the two comparator stages, their order and the complementary outputs.
// This design's choice: an exact tie resolves to spin -1.
module pbit_comparator
  import pchip_pkg::*;
(
  input  diff_cur_t i_tanh,   // I+_TANH, I-_TANH (through the current mirror)
  input  diff_cur_t i_rng,    // I+_RNG, I-_RNG
  output logic      m,        // m_j
  output logic      m_n       // m_jN
);

  logic signed [CUR_W:0] sum_p, sum_n;

  always_comb begin
    sum_p = (CUR_W+1)'(i_tanh.p) + (CUR_W+1)'(i_rng.p);
    sum_n = (CUR_W+1)'(i_tanh.n) + (CUR_W+1)'(i_rng.n);
    m     = sum_p > sum_n;
    m_n   = ~m;
  end

endmodule
