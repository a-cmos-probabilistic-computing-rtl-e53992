// spi_slave: SPI port of the chip for loading weights and reading spins.
//
// SPI mode 0 (SCLK idle low, MOSI sampled on the rising edge, MISO changed on the falling edge),
// 32-bit frames, MSB first, framed by CS_N low:
//     bit 31      1 = read, 0 = write
//     bits 30:16  register address
//     bits 15:0   write data (writes) / read data returned on MISO (reads)
// The pins are synchronised into the system clock domain with two flip-flops and their edges
// detected there, so SCLK must stay at most 1/8 of the system clock (each SCLK phase at least
// four system cycles). A write frame produces a one-cycle wr pulse after its 32nd rising edge.
// A read frame produces a one-cycle rd pulse after its 16th rising edge; the register file
// answers on rdata one cycle later and the answer is shifted out MSB first, its first bit valid
// before the 17th rising edge. MISO is driven low while CS_N is high. A frame cut short by CS_N
// going high is dropped.
//
// From the paper: only that an SPI interface loads the weights and reads the spin values. The
// frame format, the mode and the oversampling are this design's choices.
module spi_slave
  import pchip_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sclk,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  output logic              wr,        // write strobe
  output logic              rd,        // read strobe
  output logic [ADDR_W-1:0] addr,
  output logic [15:0]       wdata,
  input  logic [15:0]       rdata      // valid the cycle after rd
);

  logic [2:0] sclk_s, cs_s, mosi_s;   // synchronisers plus one stage for edge detection
  logic       sclk_rise, sclk_fall, cs_act;
  logic [5:0] cnt;                    // rising edges seen in this frame
  logic [31:0] shin;
  logic [15:0] shout;
  logic        is_read, load_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[1:0], mosi};
    end
  end

  assign sclk_rise = sclk_s[1] & ~sclk_s[2];
  assign sclk_fall = ~sclk_s[1] & sclk_s[2];
  assign cs_act    = ~cs_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= '0;
      shin         <= '0;
      shout        <= '0;
      is_read      <= 1'b0;
      load_pending <= 1'b0;
      wr           <= 1'b0;
      rd           <= 1'b0;
      addr         <= '0;
      wdata        <= '0;
    end else begin
      wr <= 1'b0;
      rd <= 1'b0;
      if (!cs_act) begin
        cnt          <= '0;
        shout        <= '0;
        load_pending <= 1'b0;
      end else begin
        if (sclk_rise && cnt < 6'd32) begin
          shin <= {shin[30:0], mosi_s[1]};
          cnt  <= cnt + 6'd1;
          if (cnt == 6'd15) begin
            is_read <= shin[14];
            addr    <= {shin[13:0], mosi_s[1]};
            if (shin[14]) begin
              rd           <= 1'b1;
              load_pending <= 1'b1;
            end
          end
          if (cnt == 6'd31 && !is_read) begin
            wdata <= {shin[14:0], mosi_s[1]};
            wr    <= 1'b1;
          end
        end
        if (load_pending && !rd) begin
          shout        <= rdata;
          load_pending <= 1'b0;
        end else if (sclk_fall && cnt >= 6'd17) begin
          shout <= {shout[14:0], 1'b0};
        end
      end
    end
  end

  assign miso = cs_act & shout[15];

  // A read and a write are never requested in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(wr && rd));

endmodule
