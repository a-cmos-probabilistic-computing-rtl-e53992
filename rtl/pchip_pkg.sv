// pchip_pkg: shared types and constants of the 440 p-bit Chimera probabilistic computer.
//
// The chip is a 7 x 8 array of Chimera unit cells, one of which is given up to the bias
// generator and the SPI port, leaving 55 cells of 8 p-bits (440 spins). Each unit cell is a
// 4:4 restricted Boltzmann machine: four "vertical" nodes (local index 0..3) couple to all four
// "horizontal" nodes (local index 4..7). Vertical node i also couples to vertical node i of the
// cells above and below, horizontal node i to horizontal node i of the cells left and right, so
// every node has six coupling inputs. Weights and biases are 8-bit codes, each with an enable bit.
//
// Analog currents (weight DAC outputs, Gilbert multiplier outputs, tanh and random currents) are
// carried as signed integers in units of one DAC LSB times the bias-generator scale. The array
// size, the 8-bit weight width and the six inputs per node are the paper's; the integer current
// representation, the address map and the field layouts below are this design's own choices.
package pchip_pkg;

  // Array geometry (paper: 7x8 cells, one replaced by bias circuits and SPI).
  localparam int unsigned CELL_ROWS  = 7;
  localparam int unsigned CELL_COLS  = 8;
  localparam int unsigned NODES_PER_CELL = 8;   // 4 vertical + 4 horizontal
  localparam int unsigned HALF       = 4;       // nodes per side of the 4:4 RBM
  localparam int unsigned FANIN      = 6;       // coupling inputs per node
  localparam int unsigned WBITS      = 8;       // weight / bias DAC resolution
  localparam int unsigned PRBS_W     = 32;      // outputs of one PRBS generator

  // Signed width of a current value. The largest magnitude at a summing node is
  // 7 inputs x 255 LSB x scale 15 = 26775, which fits 17 bits; 20 leaves margin.
  localparam int unsigned CUR_W = 20;
  typedef logic signed [CUR_W-1:0] cur_t;

  // Differential current pair (I+ and I-), as drawn on every analog symbol.
  typedef struct packed {
    cur_t p;
    cur_t n;
  } diff_cur_t;

  // One weight register: an enable bit and an 8-bit two's-complement weight.
  typedef struct packed {
    logic             en;
    logic [WBITS-1:0] w;
  } weight_t;

  // Register file map: each cell position owns a 32-entry slot, whether or not the cell exists.
  //   offset  0..15  intra-cell coupling J(V_i, H_j) at 4*i + j
  //   offset 16..23  bias h of local node k
  //   offset 24..27  coupling from vertical node i to vertical node i of the cell below
  //   offset 28..31  coupling from horizontal node i to horizontal node i of the cell to the right
  localparam int unsigned SLOT        = 32;
  localparam int unsigned OFS_J       = 0;
  localparam int unsigned OFS_H       = 16;
  localparam int unsigned OFS_SOUTH   = 24;
  localparam int unsigned OFS_EAST    = 28;

  // SPI frame: 32 bits, MSB first. [31] read, [30:16] address, [15:0] data.
  // Addresses at SPIN_BASE and above read the eight spins of cell (addr - SPIN_BASE).
  localparam int unsigned SPI_FRAME   = 32;
  localparam int unsigned ADDR_W      = 15;
  localparam int unsigned SPIN_BASE   = 32'h4000;

  // DAC switch codes for a two's-complement weight: the positive branch is driven by the
  // offset-binary code, the negative branch by its complement, so I+ - I- = (2w + 1) LSB.
  function automatic logic [WBITS-1:0] dac_code(input logic [WBITS-1:0] w);
    return w ^ (1 << (WBITS-1));
  endfunction

  // Reverse the bit order of one PRBS byte (horizontal nodes get the reversed sequence).
  function automatic logic [7:0] rev8(input logic [7:0] b);
    logic [7:0] r;
    for (int k = 0; k < 8; k++) r[k] = b[7-k];
    return r;
  endfunction

  // Mismatch offset of p-bit n (a fixed pseudo-random value in [-m, m]), used to model the
  // unmatched analog devices. m = 0 gives an ideal array.
  function automatic int mismatch_offset(input int unsigned n, input int m);
    int unsigned hsh;
    if (m <= 0) return 0;
    hsh = (n + 32'd1) * 32'h9E37_79B1;
    hsh = hsh ^ (hsh >> 15);
    hsh = hsh * 32'h85EB_CA6B;
    hsh = hsh ^ (hsh >> 13);
    return int'(hsh % (2 * m + 1)) - m;
  endfunction

endpackage
