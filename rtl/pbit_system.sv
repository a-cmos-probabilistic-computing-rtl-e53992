// pbit_system: the chip together with the hardware correlator of its learning loop.
//
// In the learning set-up the chip's spins are sampled by a hardware correlator on an FPGA board,
// whose processor computes new weights and biases (contrastive divergence) and writes them back
// through the chip's SPI port. This top holds the chip and the correlator; the processor is
// outside, on the SPI pins and the correlator ports. The correlator observes the eight spins of
// the cell position chosen by corr_cell, sampled on each cycle with corr_sample = 1.
//
// From the paper: the chip, the correlator, and the loop through the processor. This design's
// choices: the correlator watching one cell at a time and the parallel spin tap it uses.
module pbit_system
  import pchip_pkg::*;
#(
  parameter int unsigned ROWS       = CELL_ROWS,
  parameter int unsigned COLS       = CELL_COLS,
  parameter int unsigned ABSENT_ROW = CELL_ROWS - 1,
  parameter int unsigned ABSENT_COL = 0,
  parameter int          MISMATCH   = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  // chip pins
  input  logic        spi_sclk,
  input  logic        spi_cs_n,
  input  logic        spi_mosi,
  output logic        spi_miso,
  input  logic [3:0]  scale_j,
  input  logic [3:0]  scale_h,
  input  logic [3:0]  scale_rng,
  input  logic [3:0]  scale_tanh,
  input  logic [9:0]  vtemp_mv,
  output logic [ROWS*COLS-1:0][NODES_PER_CELL-1:0] spins,
  output logic [ROWS*COLS-2:0] cell_update,
  // correlator
  input  logic [7:0]  corr_cell,
  input  logic        corr_start,
  input  logic [14:0] corr_n_samples,
  input  logic        corr_sample,
  output logic        corr_busy,
  output logic        corr_done,
  output logic signed [15:0] corr_sum_m [NODES_PER_CELL],
  output logic signed [15:0] corr_sum_c [NODES_PER_CELL][NODES_PER_CELL]
);

  logic [NODES_PER_CELL-1:0] corr_spins;

  pchip #(
    .ROWS(ROWS), .COLS(COLS), .ABSENT_ROW(ABSENT_ROW), .ABSENT_COL(ABSENT_COL),
    .MISMATCH(MISMATCH)
  ) u_chip (
    .clk, .rst_n, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .scale_j, .scale_h, .scale_rng, .scale_tanh, .vtemp_mv, .spins, .cell_update
  );

  assign corr_spins = (int'(corr_cell) < int'(ROWS * COLS)) ? spins[corr_cell] : '0;

  hw_correlator #(.N(NODES_PER_CELL), .CNT_W(16)) u_corr (
    .clk, .rst_n, .start(corr_start), .n_samples(corr_n_samples), .sample(corr_sample),
    .spins(corr_spins), .busy(corr_busy), .done(corr_done),
    .sum_m(corr_sum_m), .sum_c(corr_sum_c)
  );

endmodule
