// tb_weight_regfile: checks the weight/bias register file against a shadow copy.
//
// Random writes (including addresses past the last register, which must be ignored) and reads
// are compared with a model kept here; every parallel output w[] must equal the model after each
// write; spin reads must return the byte of the addressed cell; unmapped reads return 0.
module tb_weight_regfile;
  import pchip_pkg::*;
  localparam int NP = 4;
  localparam int NR = NP * SLOT;
  logic clk = 0, rst_n = 0, wr = 0, rd = 0;
  logic [ADDR_W-1:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [NP-1:0][7:0] spins;
  weight_t w [NR];
  logic [8:0] shadow [NR];
  int checks = 0, failures = 0;

  weight_regfile #(.N_POS(NP)) dut (.clk, .rst_n, .wr, .rd, .addr, .wdata, .rdata, .spins, .w);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (shadow[k]) shadow[k] = '0;
    spins = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (w[k]) check(w[k] == '0, "reset value");
    for (int t = 0; t < 2000; t++) begin
      int a;
      int op;
      op = $urandom_range(0, 2);
      spins = {NP{8'($urandom)}};
      spins[1] = 8'($urandom);
      if (op == 0) begin
        a = ($urandom_range(0, 9) == 0) ? $urandom_range(NR, NR + 50) : $urandom_range(0, NR - 1);
        addr = 15'(a); wdata = 16'($urandom); wr = 1;
        @(negedge clk) wr = 0;
        if (a < NR) shadow[a] = wdata[8:0];
        foreach (w[k]) if (w[k] != weight_t'(shadow[k])) check(0, $sformatf("register %0d", k));
        check(1, "write");
      end else if (op == 1) begin
        a = $urandom_range(0, NR - 1);
        addr = 15'(a); rd = 1;
        @(negedge clk) rd = 0;
        check(rdata == {7'b0, shadow[a]}, $sformatf("read %0d", a));
      end else begin
        a = $urandom_range(0, NP);
        addr = 15'(SPIN_BASE + a); rd = 1;
        @(negedge clk) rd = 0;
        check(rdata == ((a < NP) ? {8'b0, spins[a]} : 16'h0), $sformatf("spin read %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
