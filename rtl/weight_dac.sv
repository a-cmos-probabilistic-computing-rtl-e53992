// weight_dac: behavioural model of the 8-bit MOS R-2R weight/bias current DAC.
//
// Behavioural model of an analog block: currents are signed integers in units of one DAC LSB.
// In the circuit an R-2R ladder biased by n_bias splits a reference into binary-weighted branch
// currents IDAC<7:0>. Bit k of the switch code j steers branch k to the positive output I+,
// bit k of jn steers it to the negative output I-. With en_n high both outputs are cut off, which
// removes the connection even where mismatch would leave a residual current at a zero weight.
// The output is the differential current pair that the circuit turns into bias voltages
// (nb / nbN) and distributes to the Gilbert multipliers of both ends of an undirected edge.
// Combinational; output follows the inputs immediately.
//
// From the paper: 8 bits, R-2R ladder, the J/JN switch pairs and the enable input EnN.
// This design's choices: scale is a 4-bit multiplier standing for the bias-generator current
// (set by an external resistor on the chip), and en_n = 1 means disabled.
module weight_dac
  import pchip_pkg::*;
(
  input  logic [WBITS-1:0] j,       // switch code of the positive branch
  input  logic [WBITS-1:0] jn,      // switch code of the negative branch
  input  logic             en_n,    // 1: outputs off
  input  logic [3:0]       scale,   // LSB current, from the bias generator
  output diff_cur_t        i_out    // I+_WT, I-_WT
);

  always_comb begin
    if (en_n) begin
      i_out.p = '0;
      i_out.n = '0;
    end else begin
      i_out.p = cur_t'(j)  * cur_t'(scale);
      i_out.n = cur_t'(jn) * cur_t'(scale);
    end
  end

endmodule
