// tb_pileup_subtraction: random towers and pedestals; LAr must be max(lar - rho[eta], 0),
// Tile and saturation unchanged, and nothing may change without bc_stb.
module tb_pileup_subtraction;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  et_t  li [ETA_N][PHI_N], ti [ETA_N][PHI_N], lo [ETA_N][PHI_N], to [ETA_N][PHI_N];
  logic si [ETA_N][PHI_N], so [ETA_N][PHI_N];
  et_t  rho [ETA_N];
  int checks = 0, failures = 0, clamped = 0;

  pileup_subtraction dut (.clk, .rst, .bc_stb, .lar_in(li), .tile_in(ti), .sat_in(si), .rho,
                          .lar_out(lo), .tile_out(to), .sat_out(so));
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 20; trial++) begin
      for (int e = 0; e < ETA_N; e++) begin
        rho[e] = et_t'($urandom % 500);
        for (int p = 0; p < PHI_N; p++) begin
          li[e][p] = et_t'($urandom % 1000); ti[e][p] = et_t'($urandom % 5000); si[e][p] = 1'($urandom);
        end
      end
      @(negedge clk) bc_stb = 1; @(negedge clk) bc_stb = 0;
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        int exp_l;
        exp_l = int'(li[e][p]) - int'(rho[e]);
        if (exp_l < 0) begin exp_l = 0; clamped++; end
        checks++;
        if (int'(lo[e][p]) != exp_l || to[e][p] != ti[e][p] || so[e][p] != si[e][p]) failures++;
      end
      // hold without strobe
      li[0][0] = li[0][0] + 1'b1;
      @(negedge clk); @(negedge clk);
      checks++; if (int'(lo[0][0]) != (int'(li[0][0]) - 1 > int'(rho[0]) ? int'(li[0][0]) - 1 - int'(rho[0]) : 0)) failures++;
    end
    checks++; if (clamped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
