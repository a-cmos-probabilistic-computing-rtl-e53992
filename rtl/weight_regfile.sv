// weight_regfile: the chip's weight and bias registers and the spin read-back path.
//
// One 9-bit register (enable bit and 8-bit two's-complement weight) per coupling and per bias,
// N_POS cell positions of 32 registers each (map in pchip_pkg). All registers drive their DACs
// in parallel through w. A write strobe stores wdata[8:0] at addr if addr is a register address.
// A read strobe registers, for the next cycle on rdata, either the register at addr (zero
// extended) or, for addr = SPIN_BASE + p, the eight spins of cell position p. All registers
// reset to zero, that is, every coupling and bias disabled.
//
// From the paper: 8-bit digital weights and an enable bit per weight, loaded over SPI, and spin
// values read back over SPI. The register organisation, the address map and the reset values
// are this design's choices.
module weight_regfile
  import pchip_pkg::*;
#(
  parameter int unsigned N_POS = CELL_ROWS * CELL_COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr,
  input  logic              rd,
  input  logic [ADDR_W-1:0] addr,
  input  logic [15:0]       wdata,
  output logic [15:0]       rdata,
  input  logic [N_POS-1:0][NODES_PER_CELL-1:0] spins,
  output weight_t           w [N_POS*SLOT]
);

  localparam int unsigned N_REG = N_POS * SLOT;

  // One register per entry, each with its own address decode.
  for (genvar k = 0; k < int'(N_REG); k++) begin : g_reg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                              w[k] <= '0;
      else if (wr && int'(addr) == k)          w[k] <= weight_t'(wdata[8:0]);
    end
  end

  localparam int unsigned IDX_W = $clog2(N_REG);
  localparam int unsigned POS_W = $clog2(N_POS);

  logic [IDX_W-1:0] reg_idx;
  logic [POS_W-1:0] pos_idx;
  assign reg_idx = IDX_W'(addr);
  assign pos_idx = POS_W'(addr - ADDR_W'(SPIN_BASE));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata <= '0;
    end else if (rd) begin
      if (int'(addr) < int'(N_REG))
        rdata <= 16'(w[reg_idx]);
      else if (int'(addr) >= int'(SPIN_BASE) && int'(addr) < int'(SPIN_BASE + N_POS))
        rdata <= 16'(spins[pos_idx]);
      else
        rdata <= '0;
    end
  end

endmodule
