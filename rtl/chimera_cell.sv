// chimera_cell: one Chimera unit cell, a 4:4 restricted Boltzmann machine of eight p-bits.
//
// Behavioural model (it contains the analog p-bit models); the PRBS generator, byte routing
// and spin flip-flops are synthesizable logic. Local nodes 0..3 are the vertical nodes V0..V3,
// 4..7 the horizontal nodes H0..H3. Each of the 16 undirected edges (V_i, H_j) has a single
// weight DAC whose current goes to the multipliers at both of its ends. Coupling inputs of a
// node, in slot order:
//     V_i:  slots 0..3 = H_0..H_3 (weights J[4i+j]),  slot 4 = north, slot 5 = south neighbour
//     H_j:  slots 0..3 = V_0..V_3 (weights J[4i+j]),  slot 4 = west,  slot 5 = east neighbour
// The inter-cell currents and neighbour spins come in through ext_i / ext_m (index 0 = north or
// west, 1 = south or east). The cell's 32-output PRBS generator is clocked by the cell's random
// clock (it advances on clk_rise); byte k feeds vertical node k in normal bit order and
// horizontal node k bit-reversed, so 32 PRBS bits give eight random bytes. The four vertical
// spins sample their comparators on clk_rise, the four horizontal spins on clk_fall, so the two
// sides of the RBM never update together (block Gibbs sampling). New spins are visible the cycle
// after the pulse.
//
// From the paper: the 4:4 RBM, six inputs per node, one DAC per undirected edge, one 32-bit PRBS
// per cell on a pseudo-random clock, and the normal/reversed byte sharing between vertical and
// horizontal nodes, Gibbs sampling. This design's choices: which byte goes to which node, the
// slot order, and updating the vertical side on the rising and the horizontal side on the falling
// edge of the cell's random clock.
module chimera_cell
  import pchip_pkg::*;
#(
  parameter logic [30:0] SEED     = 31'h1,
  parameter int unsigned CELL_ID  = 0,     // used only for the mismatch offsets
  parameter int          MISMATCH = 0      // largest mismatch offset, current units
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clk_rise,                     // rising edge of this cell's random clock
  input  logic       clk_fall,                     // falling edge of this cell's random clock
  input  weight_t    w_j   [HALF*HALF],            // intra-cell couplings J(V_i, H_j)
  input  weight_t    w_h   [NODES_PER_CELL],       // biases
  input  diff_cur_t  ext_i [NODES_PER_CELL][2],    // inter-cell edge currents
  input  logic       ext_m [NODES_PER_CELL][2],    // inter-cell neighbour spins
  input  logic [3:0] scale_j,
  input  logic [3:0] scale_h,
  input  logic [3:0] scale_rng,
  input  cur_t       i_tail,
  input  logic [9:0] vtemp_mv,
  output logic [NODES_PER_CELL-1:0] m               // spins, bit k = local node k
);

  logic [PRBS_W-1:0] prbs;
  diff_cur_t         i_edge [HALF*HALF];
  diff_cur_t         node_i [NODES_PER_CELL][FANIN];
  logic              node_m [NODES_PER_CELL][FANIN];
  logic [7:0]        node_r [NODES_PER_CELL];

  prbs31_gen #(.N_OUT(PRBS_W), .SEED(SEED)) u_prbs (
    .clk, .rst_n, .en(clk_rise), .out(prbs)
  );

  // One DAC per undirected intra-cell edge.
  for (genvar e = 0; e < int'(HALF*HALF); e++) begin : g_dac
    logic [WBITS-1:0] code;
    assign code = dac_code(w_j[e].w);
    weight_dac u_dac (
      .j(code), .jn(~code), .en_n(~w_j[e].en), .scale(scale_j), .i_out(i_edge[e])
    );
  end

  // Fan-in wiring.
  for (genvar i = 0; i < int'(HALF); i++) begin : g_side
    for (genvar j = 0; j < int'(HALF); j++) begin : g_pair
      assign node_i[i][j]      = i_edge[HALF*i + j];     // V_i sees H_j
      assign node_m[i][j]      = m[HALF + j];
      assign node_i[HALF+j][i] = i_edge[HALF*i + j];     // H_j sees V_i
      assign node_m[HALF+j][i] = m[i];
    end
    assign node_r[i]      = prbs[8*i +: 8];              // vertical: normal order
    assign node_r[HALF+i] = rev8(prbs[8*i +: 8]);        // horizontal: reversed
  end
  for (genvar n = 0; n < int'(NODES_PER_CELL); n++) begin : g_ext
    assign node_i[n][HALF]   = ext_i[n][0];
    assign node_i[n][HALF+1] = ext_i[n][1];
    assign node_m[n][HALF]   = ext_m[n][0];
    assign node_m[n][HALF+1] = ext_m[n][1];
  end

  for (genvar n = 0; n < int'(NODES_PER_CELL); n++) begin : g_pbit
    logic m_n_unused;
    pbit #(.OFFSET(mismatch_offset(CELL_ID * NODES_PER_CELL + n, MISMATCH))) u_pbit (
      .clk, .rst_n, .upd((n < int'(HALF)) ? clk_rise : clk_fall),
      .i_w(node_i[n]), .m_nbr(node_m[n]), .h(w_h[n]), .prbs(node_r[n]),
      .scale_h, .scale_rng, .i_tail, .vtemp_mv,
      .m(m[n]), .m_n(m_n_unused)
    );
  end

endmodule
