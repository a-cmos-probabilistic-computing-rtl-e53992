// spi_master_bfm: SPI mode-0 master used by the test benches to talk to the chip.
//
// xfer(frame, rx) sends one 32-bit frame MSB first and returns the 32 bits sampled on MISO
// (MISO sampled on each rising SCLK edge, like MOSI at the slave). SCLK has a period of
// 2*HALF_NS; at the default 40 ns half period and a 10 ns system clock this is 1/8 of the system
// clock, the fastest rate the chip's oversampling SPI port accepts. write_reg and read_reg build
// the frames of the chip's register protocol: [31] read, [30:16] address, [15:0] data.
module spi_master_bfm #(
  parameter int HALF_NS = 40
) (
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);
  initial begin
    sclk = 0;
    cs_n = 1;
    mosi = 0;
  end

  int frames = 0;

  task automatic xfer(input logic [31:0] frame, output logic [31:0] rx);
    cs_n = 0;
    #(HALF_NS);
    for (int b = 31; b >= 0; b--) begin
      mosi = frame[b];
      #(HALF_NS);
      sclk = 1;
      rx[b] = miso;
      #(HALF_NS);
      sclk = 0;
    end
    #(HALF_NS);
    cs_n = 1;
    #(2 * HALF_NS);
    frames++;
  endtask

  task automatic write_reg(input int addr, input logic [15:0] data);
    logic [31:0] rx;
    xfer({1'b0, 15'(addr), data}, rx);
  endtask

  task automatic read_reg(input int addr, output logic [15:0] data);
    logic [31:0] rx;
    xfer({1'b1, 15'(addr), 16'h0}, rx);
    data = rx[15:0];
  endtask
endmodule
