// tb_global_sums: random core towers against a floating-point E_T vector sum.
//
// The model sums LAr + Tile over the core and forms E_x, E_y with real cos/sin of the
// bin centre 2*pi*k/64; the RTL uses a Q10 table, so E_x and E_y must agree within the
// table's rounding (0.1% of the scalar sum plus 2 counts). Sum E_T and the saturation
// bit must be exact. Run at PHI_BASE = 16 so that a non-trivial quadrant is used.
module tb_global_sums;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  et_t  lar [ETA_N][PHI_N], tile [ETA_N][PHI_N];
  logic sat [ETA_N][PHI_N];
  tob_t tob [3];
  int checks = 0, failures = 0;
  localparam int BASE = 16;

  global_sums #(.PHI_BASE(BASE)) dut (.clk, .rst, .bc_stb, .lar_et(lar), .tile_et(tile), .sat, .tob);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 50; trial++) begin
      longint s; real ex, ey; bit anysat; int tol;
      s = 0; ex = 0; ey = 0; anysat = 0;
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        lar[e][p]  = (trial % 10 == 0) ? et_t'(($urandom % 2) ? 32000 : 0) : et_t'($urandom % 4000);
        tile[e][p] = et_t'(20 * ($urandom % 64));
        sat[e][p]  = ($urandom % 300 == 0);
        if (e >= ETA_MARGIN && e < ETA_MARGIN + ETA_CORE && p >= PHI_MARGIN && p < PHI_MARGIN + PHI_CORE) begin
          int t; real phi;
          t = lar[e][p] + tile[e][p];
          phi = 2.0 * 3.14159265358979 * (BASE + p - PHI_MARGIN) / 64.0;
          s += t; ex += t * $cos(phi); ey += t * $sin(phi);
          anysat |= sat[e][p];
        end
      end
      @(negedge clk) bc_stb = 1; @(negedge clk) bc_stb = 0;
      tol = int'(s / 8 / 1000) + 2;
      checks += 4;
      if (tob[0][23:0] != 24'(s >> 3)) begin failures++; $display("FAIL sum %0d exp %0d", tob[0][23:0], s >> 3); end
      if (tob[0][31] != anysat) failures++;
      if ($signed(tob[1]) > int'(ex / 8.0) + tol || $signed(tob[1]) < int'(ex / 8.0) - tol) begin
        failures++; $display("FAIL ex %0d exp %f", $signed(tob[1]), ex / 8.0); end
      if ($signed(tob[2]) > int'(ey / 8.0) + tol || $signed(tob[2]) < int'(ey / 8.0) - tol) begin
        failures++; $display("FAIL ey %0d exp %f", $signed(tob[2]), ey / 8.0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
