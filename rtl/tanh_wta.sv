// tanh_wta: behavioural model of the winner-take-all tanh stage of a p-bit.
//
// Behavioural model of an analog block: currents are signed integers in DAC LSB units.
// The six Gilbert multiplier outputs and the bias DAC output are wired onto the two input nodes
// of a fully differential winner-take-all pair, so the differential input is
//     x = sum(Pb+) - sum(Pb-) + OFFSET.
// Each WTA branch takes a Fermi function of the input difference out of the tail current; the
// difference of the two branches is a tanh. The model computes
//     t = beta * x / 256,   y = i_tail * tanh(t),   I+ = i_tail + y,   I- = i_tail - y
// where beta = (V_temp - 700 mV) / 64 per mV, zero at or below 700 mV, so a higher V_temp means a
// colder, more deterministic p-bit. tanh is interpolated linearly between 17 points of a table
// (t = 0, 0.25, ..., 4, values tanh(t) * 4096 rounded) and taken as 1 beyond t = 4; the error is
// below 0.7 % of full scale. Combinational.
//
// From the paper: the WTA topology, summation by wiring, the Fermi/tanh behaviour, V_temp as
// the temperature control, and its 700-1000 mV range running from hot to cold. This design's
// choices: the linear V_temp-to-beta law, the input scale of 256 current units per unit of t,
// the interpolated table, and the OFFSET parameter standing for unmatched devices (0 = ideal).
module tanh_wta
  import pchip_pkg::*;
#(
  parameter int OFFSET = 0             // input-referred mismatch, in current units
) (
  input  diff_cur_t  i_in [FANIN],     // Pb_{mj*Jij} / Pb_{mjN*JijN}, six couplings
  input  diff_cur_t  i_bias,           // Pb_hi / Pb_hiN
  input  logic [9:0] vtemp_mv,         // V_temp in mV
  input  cur_t       i_tail,           // n_biasTANH: tail current, >= 0
  output diff_cur_t  i_out             // I+_TANH, I-_TANH
);

  // tanh(k/4) * 4096, k = 0..16
  localparam logic [12:0] TANH_TAB [17] = '{
    13'd0,    13'd1003, 13'd1893, 13'd2602, 13'd3119, 13'd3475, 13'd3707, 13'd3856,
    13'd3949, 13'd4006, 13'd4041, 13'd4062, 13'd4076, 13'd4084, 13'd4089, 13'd4091, 13'd4093
  };

  localparam int XW = CUR_W + 4;              // room for seven summed currents and the offset

  logic signed [XW-1:0] x;
  logic        [XW-1:0] x_abs;
  logic        [8:0]    beta_q6;              // beta * 64
  logic        [XW+8:0] t_q8;                 // t * 256
  logic        [4:0]    seg;
  logic        [5:0]    frac;
  logic        [12:0]   f_lo, f_hi;
  logic        [12:0]   f;                    // tanh(|t|) * 4096
  logic        [CUR_W+12:0] y_abs_w;
  cur_t                 y_abs, y;

  always_comb begin
    x = XW'(i_bias.p) - XW'(i_bias.n) + XW'(OFFSET);
    for (int k = 0; k < int'(FANIN); k++) x += XW'(i_in[k].p) - XW'(i_in[k].n);
    x_abs   = (x < 0) ? XW'(-x) : XW'(x);
    beta_q6 = (vtemp_mv > 10'd700) ? 9'(vtemp_mv - 10'd700) : 9'd0;
    t_q8    = ((XW+9)'(x_abs) * (XW+9)'(beta_q6)) >> 6;
    seg  = 5'(t_q8 >> 6);
    frac = 6'(t_q8);
    f_lo = TANH_TAB[(seg > 5'd15) ? 5'd15 : seg];
    f_hi = TANH_TAB[(seg > 5'd15) ? 5'd16 : seg + 5'd1];
    if (t_q8 >= (XW+9)'(1024)) f = 13'd4096;
    else f = f_lo + 13'((19'(f_hi - f_lo) * 19'(frac)) >> 6);
    y_abs_w = ((CUR_W+13)'(i_tail) * (CUR_W+13)'(f)) >> 12;
    y_abs   = cur_t'(y_abs_w);
    y       = (x < 0) ? -y_abs : y_abs;
    i_out.p = i_tail + y;
    i_out.n = i_tail - y;
  end

endmodule
