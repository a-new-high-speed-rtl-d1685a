// tb_config_regs: reset values, then write and read back every register with random data.
module tb_config_regs;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, we = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  cfg_t cfg;
  et_t rho [ETA_N];
  int checks = 0, failures = 0;

  config_regs dut (.clk, .rst, .cfg_we(we), .cfg_addr(addr), .cfg_wdata(wdata), .cfg_rdata(rdata), .cfg, .rho);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk) addr = a; we = 0;
    @(negedge clk) d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    logic [15:0] val [64];
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    rd(8'h05, d); checks++; if (d != 32'd100) failures++;
    rd(8'h02, d); checks++; if (d != 32'd200) failures++;
    for (int a = 0; a < 64; a++) begin
      val[a] = (a == 5) ? 16'($urandom % 128) : 16'($urandom);
      @(negedge clk) addr = 8'(a); wdata = {16'hFFFF, val[a]}; we = 1;
    end
    @(negedge clk) we = 0;
    for (int a = 0; a < 64; a++) begin
      rd(8'(a), d);
      checks++;
      if (a <= 5 || (a >= 32 && a < 32 + ETA_N)) begin
        if (d != 32'(val[a])) begin failures++; $display("FAIL addr %0d got %h exp %h", a, d, val[a]); end
      end else if (d != 32'hDEAD_BEEF) failures++;
    end
    checks += 3;
    if (cfg.thr_lar != val[0] || cfg.seed_thr_tau != val[4]) failures++;
    if (cfg.l1a_latency != val[5][6:0]) failures++;
    if (rho[7] != val[39]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
