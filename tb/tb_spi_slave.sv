// tb_spi_slave: checks the SPI port with a mode-0 master.
//
// Random write frames must each give exactly one wr pulse with the frame's address and data
// and no rd pulse. Read frames must give one rd pulse with the address; a register model here
// answers on rdata the next cycle and the master must receive that value in the frame's last
// 16 bits. A frame cut short by CS_N must produce no strobe.
module tb_spi_slave;
  import pchip_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sclk, cs_n, mosi, miso;
  logic wr, rd;
  logic [ADDR_W-1:0] addr;
  logic [15:0] wdata, rdata;
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0;
  logic [ADDR_W-1:0] last_addr;
  logic [15:0] last_wdata;

  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .wr, .rd, .addr, .wdata, .rdata);
  spi_master_bfm bfm (.sclk, .cs_n, .mosi, .miso);

  always #5 clk = ~clk;

  function automatic logic [15:0] model(input logic [ADDR_W-1:0] a);
    return 16'(a) * 16'h2F1B + 16'h5A5A;
  endfunction

  always_ff @(posedge clk) begin
    if (wr) begin n_wr++; last_addr <= addr; last_wdata <= wdata; end
    if (rd) begin n_rd++; last_addr <= addr; end
    rdata <= rd ? model(addr) : 16'hDEAD;   // only valid the cycle after rd
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int t = 0; t < 100; t++) begin
      int a, w0, r0;
      logic [15:0] d, q;
      a = $urandom_range(0, 32767);
      d = 16'($urandom);
      w0 = n_wr; r0 = n_rd;
      if ($urandom_range(0, 1)) begin
        bfm.write_reg(a, d);
        check(n_wr == w0 + 1 && n_rd == r0, "one write strobe");
        check(last_addr == 15'(a) && last_wdata == d, $sformatf("write addr/data %h %h", a, d));
      end else begin
        bfm.read_reg(a, q);
        check(n_rd == r0 + 1 && n_wr == w0, "one read strobe");
        check(last_addr == 15'(a), "read address");
        check(q == model(15'(a)), $sformatf("read data %h exp %h", q, model(15'(a))));
      end
    end
    // aborted frame: 20 bits then CS_N high
    begin
      int w0, r0;
      w0 = n_wr; r0 = n_rd;
      bfm.cs_n = 0;
      for (int b = 0; b < 20; b++) begin
        bfm.mosi = 1'b0; #40 bfm.sclk = 1; #40 bfm.sclk = 0;
      end
      #40 bfm.cs_n = 1;
      #200;
      check(n_wr == w0 && n_rd == r0, "aborted write frame gives no strobe");
      check(miso == 0, "MISO low when deselected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
