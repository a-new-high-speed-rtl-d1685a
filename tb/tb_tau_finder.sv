// tb_tau_finder: random sparse tower grids against a brute-force tau model.
//
// Seeds are local maxima of LAr + Tile (8 neighbours, position tie rule); tau E_T is the
// 3x3 LAr + Tile sum and isolation the LAr sum of the 5x5 square minus the 3x3, both
// computed with plain loops. All 128 candidates are compared each trial.
module tb_tau_finder;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  et_t  lar [ETA_N][PHI_N], tile [ETA_N][PHI_N];
  logic sat [ETA_N][PHI_N];
  et_t  thr;
  cand_t cand [N_CORE];
  int checks = 0, failures = 0, nseeds = 0;

  tau_finder dut (.clk, .rst, .bc_stb, .lar_et(lar), .tile_et(tile), .sat, .seed_thr(thr), .cand);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int tot(int e, int p); return int'(lar[e][p]) + int'(tile[e][p]); endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 40; trial++) begin
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        lar[e][p]  = (($urandom % 3) == 0) ? et_t'($urandom % 3000) : '0;
        tile[e][p] = (($urandom % 5) == 0) ? et_t'(20 * ($urandom % 100)) : '0;
        sat[e][p]  = ($urandom % 40 == 0);
      end
      thr = et_t'($urandom % 600);
      @(negedge clk) bc_stb = 1; @(negedge clk) bc_stb = 0;
      for (int ce = 0; ce < ETA_CORE; ce++) for (int cp = 0; cp < PHI_CORE; cp++) begin
        int e, p, s, i3, i5, iq; bit seed; cand_t c; logic [31:0] exp_tob;
        e = ce + ETA_MARGIN; p = cp + PHI_MARGIN;
        seed = tot(e, p) > int'(thr);
        for (int de = -1; de <= 1; de++) for (int dp = -1; dp <= 1; dp++)
          if (de < 0 || (de == 0 && dp < 0)) seed &= tot(e, p) > tot(e+de, p+dp);
          else if (de > 0 || dp > 0)         seed &= tot(e, p) >= tot(e+de, p+dp);
        s = 0; i3 = 0; i5 = 0;
        for (int de = -2; de <= 2; de++) for (int dp = -2; dp <= 2; dp++) begin
          i5 += lar[e+de][p+dp];
          if (de >= -1 && de <= 1 && dp >= -1 && dp <= 1) begin
            s += tot(e+de, p+dp); i3 += lar[e+de][p+dp];
          end
        end
        iq = (i5 - i3) >> 3; if (iq > 255) iq = 255;
        exp_tob = {sat[e][p], 8'(iq), 1'b0, 12'(s >> 3), 5'(cp), 5'(ce)};
        c = cand[ce*PHI_CORE+cp];
        checks++;
        if (seed) begin
          nseeds++;
          if (!c.valid || c.key != 24'(s) || c.tob != exp_tob) begin
            failures++;
            if (failures < 5) $display("FAIL (%0d,%0d) key %0d exp %0d tob %h exp %h", ce, cp, c.key, s, c.tob, exp_tob);
          end
        end else if (c.valid) failures++;
      end
    end
    checks++; if (nseeds < 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
