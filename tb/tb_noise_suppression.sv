// tb_noise_suppression: decode and threshold of random codes against hand-written rules.
//
// The LAr expectation is built from the printed end points: code 0 = -3.2 GeV, code 4095
// = 800 GeV, steps 25/50/100/200/400 MeV above codes 1024/1536/2048/2638, written here as
// a real-valued GeV formula; Tile is 0.5 GeV per count. Values below the threshold or
// negative must be zero. End points are checked explicitly.
module tb_noise_suppression;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  logic [11:0] lc [ETA_N][PHI_N];
  logic        ls [ETA_N][PHI_N];
  logic [7:0]  tc [ETA_N][PHI_N];
  et_t  thr_lar, thr_tile;
  et_t  lar [ETA_N][PHI_N], tile [ETA_N][PHI_N];
  logic sat [ETA_N][PHI_N];
  int checks = 0, failures = 0;

  noise_suppression dut (.clk, .rst, .bc_stb, .lar_code(lc), .lar_sat(ls), .tile_code(tc),
                         .thr_lar, .thr_tile, .lar_et(lar), .tile_et(tile), .sat);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real gev(int c);
    real g;
    g = -3.2;
    g += 0.025 * (c < 1024 ? c : 1024);
    if (c > 1024) g += 0.05 * ((c < 1536 ? c : 1536) - 1024);
    if (c > 1536) g += 0.1 * ((c < 2048 ? c : 2048) - 1536);
    if (c > 2048) g += 0.2 * ((c < 2638 ? c : 2638) - 2048);
    if (c > 2638) g += 0.4 * (c - 2638);
    return g;
  endfunction

  initial begin
    checks++; if (gev(4095) < 799.99 || gev(4095) > 800.01) failures++;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 20; trial++) begin
      thr_lar = et_t'($urandom % 400); thr_tile = et_t'($urandom % 200);
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        lc[e][p] = 12'($urandom); tc[e][p] = 8'($urandom); ls[e][p] = 1'($urandom);
        if (e == 0 && p == 0) lc[e][p] = 12'd0;
        if (e == 0 && p == 1) lc[e][p] = 12'd4095;
        if (p == 2) lc[e][p] = 12'($urandom % 1200);   // around zero and threshold
      end
      @(negedge clk) bc_stb = 1; @(negedge clk) bc_stb = 0;
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        int le, te;
        le = int'(gev(lc[e][p]) / 0.025);
        if (le < int'(thr_lar) || le < 0) le = 0;
        te = int'(tc[e][p]) * 20;
        if (te < int'(thr_tile)) te = 0;
        checks++;
        if (int'(lar[e][p]) != le || int'(tile[e][p]) != te || sat[e][p] != ls[e][p]) begin
          failures++;
          if (failures < 5) $display("FAIL code %0d lar %0d exp %0d tile %0d exp %0d", lc[e][p], lar[e][p], le, tile[e][p], te);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
