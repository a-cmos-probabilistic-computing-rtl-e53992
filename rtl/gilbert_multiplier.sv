// gilbert_multiplier: behavioural model of the current-mode Gilbert multiplier.
//
// Behavioural model of an analog block: currents are signed integers in DAC LSB units.
// It multiplies the differential weight current of one edge by the neighbour's spin m_j in
// {+1, -1}. The spin is given as the complementary pair m_j / m_jN; for m_j = 1 the weight
// current pair passes straight to Pb+ / Pb-, for m_j = 0 (spin -1) the pair is crossed, which
// negates the differential value. The outputs of the six multipliers of a node are wired
// together, so summation is free. Combinational.
//
// From the paper: the multiplier, its inputs (nb_Jij, nbN_JijN, m_j, m_jN) and outputs, and
// summation by wiring. This design's choices: spin 1 encodes +1, and both m and mN are checked so
// that a non-complementary pair (which the circuit never sees) cuts the output off.
module gilbert_multiplier
  import pchip_pkg::*;
(
  input  diff_cur_t i_w,    // weight current (nb_Jij, nbN_JijN)
  input  logic      m,      // m_j
  input  logic      m_n,    // m_jN
  output diff_cur_t i_out   // Pb_{mj*Jij}, Pb_{mjN*JijN}
);

  always_comb begin
    unique case ({m, m_n})
      2'b10:   i_out = i_w;
      2'b01:   i_out = '{p: i_w.n, n: i_w.p};
      default: i_out = '{p: '0, n: '0};
    endcase
  end

endmodule
