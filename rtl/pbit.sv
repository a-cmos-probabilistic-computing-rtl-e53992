// pbit: one probabilistic bit of the Chimera array (behavioural model of a mixed-signal cell).
//
// Behavioural model: the analog parts are the integer current models listed below; the spin
// flip-flop at the end is ordinary synthesizable logic. A p-bit computes
//     I_i = sum_j J_ij m_j + h_i           (eq. 1, currents summed on the WTA input)
//     m_i = sgn(tanh(beta I_i) + rand)     (eq. 2)
// Six Gilbert multipliers multiply the edge currents delivered by the shared weight DACs by the
// six neighbour spins; a local DAC converts the 8-bit bias h_i; the tanh WTA sums and squashes;
// a random DAC adds a uniform random current from one byte of the cell PRBS; the comparator
// chain takes the sign. The decision is stored in the spin flip-flop on a clock edge with
// upd = 1 (the cell's pseudo-random clock). m is the registered spin, 1 for +1 and 0 for -1.
// Latency: the spin seen by neighbours changes one cycle after an update edge.
//
// From the paper: the signal chain of the p-bit, six coupling inputs plus a bias input, the bias
// DAC being the same circuit as the coupling DACs, a flip-flop as spin memory. This design's
// choices: the bias current enters the WTA directly (as drawn) rather than multiplied by m_i as
// eq. (1) is printed, the reset value of the spin (-1), and the mismatch parameter.
module pbit
  import pchip_pkg::*;
#(
  parameter int OFFSET = 0                 // input-referred mismatch of this p-bit
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       upd,                  // update strobe (random clock edge of the cell)
  input  diff_cur_t  i_w   [FANIN],        // edge weight currents nb_Jij / nbN_JijN
  input  logic       m_nbr [FANIN],        // neighbour spins m_j <5:0>
  input  weight_t    h,                    // bias register: enable and 8-bit weight
  input  logic [7:0] prbs,                 // this node's random byte
  input  logic [3:0] scale_h,              // bias DAC LSB (n_biashi)
  input  logic [3:0] scale_rng,            // random DAC LSB (n_biasRNG)
  input  cur_t       i_tail,               // tanh tail current (n_biasTANH)
  input  logic [9:0] vtemp_mv,             // V_temp
  output logic       m,                    // registered spin
  output logic       m_n
);

  diff_cur_t i_mul [FANIN];
  diff_cur_t i_h, i_tanh, i_rng;
  logic      m_next, m_next_n;
  logic [WBITS-1:0] h_code;

  for (genvar k = 0; k < int'(FANIN); k++) begin : g_mul
    gilbert_multiplier u_mul (
      .i_w(i_w[k]), .m(m_nbr[k]), .m_n(~m_nbr[k]), .i_out(i_mul[k])
    );
  end

  assign h_code = dac_code(h.w);

  weight_dac u_bias_dac (
    .j(h_code), .jn(~h_code), .en_n(~h.en), .scale(scale_h), .i_out(i_h)
  );

  tanh_wta #(.OFFSET(OFFSET)) u_tanh (
    .i_in(i_mul), .i_bias(i_h), .vtemp_mv, .i_tail, .i_out(i_tanh)
  );

  rng_dac u_rng (
    .prbs, .prbsn(~prbs), .scale(scale_rng), .i_out(i_rng)
  );

  pbit_comparator u_cmp (
    .i_tanh, .i_rng, .m(m_next), .m_n(m_next_n)
  );

  // Spin memory.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   m <= 1'b0;
    else if (upd) m <= m_next;
  end
  assign m_n = ~m;

  // The comparator's two outputs are always complementary.
  always_comb assert (m_next_n == ~m_next);

endmodule
