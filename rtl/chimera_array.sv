// chimera_array: the 440 p-bit Chimera graph (behavioural model; contains the p-bit models).
//
// A ROWS x COLS grid of cell positions, one of which (ABSENT_ROW, ABSENT_COL) holds the bias
// generator and SPI port instead of a cell, so the default 7 x 8 grid has 55 cells and 440
// p-bits. Vertical node i of cell (r, c) couples to vertical node i of cell (r+1, c), horizontal
// node i of cell (r, c) to horizontal node i of cell (r, c+1); each such undirected edge has one
// weight DAC here whose current goes to both ends. Edges that would leave the grid or touch the
// missing cell do not exist, and their multiplier inputs carry no current.
//
// Weights come from the register file as one flat array, 32 entries per cell position (see
// pchip_pkg for the map). The random clock bank gives present cell k (counted row by row,
// skipping the missing position) its random clock k. spins[p] holds the eight spins of cell
// position p = r*COLS + c; the missing position reads as 0.
//
// From the paper: 7 x 8 cells with one replaced by bias and SPI circuits, 55 cells of 8 p-bits,
// the Chimera inter-cell couplings, shared edge DACs, 55 random clocks. This design's choices:
// the position of the missing cell (bottom-left, where the die photo shows "Bias & Clock"),
// the cell numbering, and the PRBS seeds.
module chimera_array
  import pchip_pkg::*;
#(
  parameter int unsigned ROWS       = CELL_ROWS,
  parameter int unsigned COLS       = CELL_COLS,
  parameter int unsigned ABSENT_ROW = CELL_ROWS - 1,
  parameter int unsigned ABSENT_COL = 0,
  parameter int          MISMATCH   = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  weight_t    w [ROWS*COLS*SLOT],
  input  logic [3:0] scale_j,
  input  logic [3:0] scale_h,
  input  logic [3:0] scale_rng,
  input  cur_t       i_tail,
  input  logic [9:0] vtemp_mv,
  output logic [ROWS*COLS-1:0][NODES_PER_CELL-1:0] spins,
  output logic [ROWS*COLS-2:0] cell_update    // rising-edge pulses of the present cells' random clocks
);

  localparam int unsigned NPOS   = ROWS * COLS;
  localparam int unsigned ABSENT = ABSENT_ROW * COLS + ABSENT_COL;

  function automatic bit present(input int r, input int c);
    return r >= 0 && c >= 0 && r < int'(ROWS) && c < int'(COLS) && (r * int'(COLS) + c) != int'(ABSENT);
  endfunction

  // Random-clock number of cell position p.
  function automatic int unsigned clk_index(input int unsigned p);
    return (p > ABSENT) ? p - 1 : p;
  endfunction

  logic [NPOS-2:0] clk_rise, clk_fall;

  random_clock_bank #(.N_CLK(NPOS - 1)) u_clocks (
    .clk, .rst_n, .clk_rise, .clk_fall
  );
  assign cell_update = clk_rise;

  // Inter-cell edge currents: south edge of vertical node i and east edge of horizontal node i.
  diff_cur_t i_south [NPOS][HALF];
  diff_cur_t i_east  [NPOS][HALF];

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      localparam int unsigned P = r * COLS + c;
      for (genvar i = 0; i < int'(HALF); i++) begin : g_edge
        if (present(r, c) && present(r + 1, c)) begin : g_s
          logic [WBITS-1:0] code;
          assign code = dac_code(w[P*SLOT + OFS_SOUTH + i].w);
          weight_dac u_dac (
            .j(code), .jn(~code), .en_n(~w[P*SLOT + OFS_SOUTH + i].en), .scale(scale_j),
            .i_out(i_south[P][i])
          );
        end else begin : g_ns
          assign i_south[P][i] = '{p: '0, n: '0};
        end
        if (present(r, c) && present(r, c + 1)) begin : g_e
          logic [WBITS-1:0] code;
          assign code = dac_code(w[P*SLOT + OFS_EAST + i].w);
          weight_dac u_dac (
            .j(code), .jn(~code), .en_n(~w[P*SLOT + OFS_EAST + i].en), .scale(scale_j),
            .i_out(i_east[P][i])
          );
        end else begin : g_ne
          assign i_east[P][i] = '{p: '0, n: '0};
        end
      end

      if (present(r, c)) begin : g_cell
        weight_t   w_j   [HALF*HALF];
        weight_t   w_h   [NODES_PER_CELL];
        diff_cur_t ext_i [NODES_PER_CELL][2];
        logic      ext_m [NODES_PER_CELL][2];

        for (genvar e = 0; e < int'(HALF*HALF); e++) begin : g_wj
          assign w_j[e] = w[P*SLOT + OFS_J + e];
        end
        for (genvar n = 0; n < int'(NODES_PER_CELL); n++) begin : g_wh
          assign w_h[n] = w[P*SLOT + OFS_H + n];
        end
        for (genvar i = 0; i < int'(HALF); i++) begin : g_ext
          // vertical node i: north (0) and south (1)
          if (r > 0) begin : g_n
            assign ext_i[i][0] = i_south[P - COLS][i];
            assign ext_m[i][0] = spins[P - COLS][i];
          end else begin : g_nn
            assign ext_i[i][0] = '{p: '0, n: '0};
            assign ext_m[i][0] = 1'b0;
          end
          assign ext_i[i][1] = i_south[P][i];
          if (r + 1 < int'(ROWS)) begin : g_s
            assign ext_m[i][1] = spins[P + COLS][i];
          end else begin : g_ns
            assign ext_m[i][1] = 1'b0;
          end
          // horizontal node i: west (0) and east (1)
          if (c > 0) begin : g_w
            assign ext_i[HALF+i][0] = i_east[P - 1][i];
            assign ext_m[HALF+i][0] = spins[P - 1][HALF+i];
          end else begin : g_nw
            assign ext_i[HALF+i][0] = '{p: '0, n: '0};
            assign ext_m[HALF+i][0] = 1'b0;
          end
          assign ext_i[HALF+i][1] = i_east[P][i];
          if (c + 1 < int'(COLS)) begin : g_e
            assign ext_m[HALF+i][1] = spins[P + 1][HALF+i];
          end else begin : g_ne
            assign ext_m[HALF+i][1] = 1'b0;
          end
        end

        chimera_cell #(
          .SEED    (31'(32'h0BAD_5EED ^ (P * 32'h0101_0F1F)) | 31'h1),
          .CELL_ID (P),
          .MISMATCH(MISMATCH)
        ) u_cell (
          .clk, .rst_n, .clk_rise(clk_rise[clk_index(P)]), .clk_fall(clk_fall[clk_index(P)]),
          .w_j, .w_h, .ext_i, .ext_m,
          .scale_j, .scale_h, .scale_rng, .i_tail, .vtemp_mv,
          .m(spins[P])
        );
      end else begin : g_hole
        assign spins[P] = '0;
      end
    end
  end

endmodule
