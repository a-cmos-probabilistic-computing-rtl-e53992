// pchip: the probabilistic computing chip (behavioural model; contains the analog p-bit models).
//
// 440 p-bits in a Chimera graph, programmed and read through SPI. The SPI port writes the
// weight/bias register file, whose 9-bit registers drive every coupling and bias DAC of the
// array in parallel, and reads back either registers or the spins of any cell. The analog
// references that the chip takes from its bias generator (set by external resistors) enter as
// 4-bit scale codes: the coupling DAC LSB, the bias DAC LSB, the random DAC LSB, and the tanh
// tail current (i_tail = 128 * scale_tanh, so equal tanh and RNG codes let the tanh span the
// random range). V_temp enters in mV. The spins are also brought out in parallel on spins, and
// the random clock pulses of the cells on cell_update, for observation.
//
// From the paper: the blocks and how they connect (SPI and weights into the array, bias
// generator scales, V_temp). This design's choices: the digital scale codes for the analog
// references, the observation ports, and the tail current factor.
module pchip
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
  input  logic       spi_sclk,
  input  logic       spi_cs_n,
  input  logic       spi_mosi,
  output logic       spi_miso,
  input  logic [3:0] scale_j,
  input  logic [3:0] scale_h,
  input  logic [3:0] scale_rng,
  input  logic [3:0] scale_tanh,
  input  logic [9:0] vtemp_mv,
  output logic [ROWS*COLS-1:0][NODES_PER_CELL-1:0] spins,
  output logic [ROWS*COLS-2:0] cell_update
);

  logic              wr, rd;
  logic [ADDR_W-1:0] addr;
  logic [15:0]       wdata, rdata;
  weight_t           w [ROWS*COLS*SLOT];
  cur_t              i_tail;

  assign i_tail = cur_t'(scale_tanh) * cur_t'(128);

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wr, .rd, .addr, .wdata, .rdata
  );

  weight_regfile #(.N_POS(ROWS * COLS)) u_regs (
    .clk, .rst_n, .wr, .rd, .addr, .wdata, .rdata, .spins, .w
  );

  chimera_array #(
    .ROWS(ROWS), .COLS(COLS), .ABSENT_ROW(ABSENT_ROW), .ABSENT_COL(ABSENT_COL),
    .MISMATCH(MISMATCH)
  ) u_array (
    .clk, .rst_n, .w, .scale_j, .scale_h, .scale_rng, .i_tail, .vtemp_mv, .spins, .cell_update
  );

endmodule
