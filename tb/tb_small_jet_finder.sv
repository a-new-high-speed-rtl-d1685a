// tb_small_jet_finder: random sparse tower grids against a brute-force model.
//
// For each trial a random set of towers gets random LAr and Tile E_T; the model marks
// seeds by comparing every core tower with its 8 neighbours directly and sums every tower
// with d_eta^2 + d_phi^2 <= 16 by a plain double loop. All 128 candidates (valid, key,
// TOB) are compared one BC after the strobe.
module tb_small_jet_finder;
  import jfex_pkg::*;
  logic clk = 0, rst = 1, bc_stb = 0;
  et_t  lar [ETA_N][PHI_N], tile [ETA_N][PHI_N];
  logic sat [ETA_N][PHI_N];
  et_t  thr;
  cand_t cand [N_CORE];
  int checks = 0, failures = 0, nseeds = 0;

  small_jet_finder dut (.clk, .rst, .bc_stb, .lar_et(lar), .tile_et(tile), .sat,
                          .seed_thr(thr), .cand);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int tot(int e, int p); return int'(lar[e][p]) + int'(tile[e][p]); endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 40; trial++) begin
      for (int e = 0; e < ETA_N; e++) for (int p = 0; p < PHI_N; p++) begin
        lar[e][p]  = ($urandom % 4 == 0) ? et_t'($urandom % (trial < 35 ? 2000 : 32000)) : '0;
        tile[e][p] = ($urandom % 6 == 0) ? et_t'(20 * ($urandom % 256)) : '0;
        if (trial % 5 == 1 && $urandom % 3 == 0) begin lar[e][p] = 100; tile[e][p] = 0; end // plateaus
        sat[e][p]  = ($urandom % 50 == 0);
      end
      thr = et_t'($urandom % 600);
      @(negedge clk) bc_stb = 1; @(negedge clk) bc_stb = 0;
      for (int ce = 0; ce < ETA_CORE; ce++) for (int cp = 0; cp < PHI_CORE; cp++) begin
        int e, p, s; bit seed; cand_t c;
        e = ce + ETA_MARGIN; p = cp + PHI_MARGIN;
        seed = tot(e, p) > int'(thr);
        for (int de = -1; de <= 1; de++) for (int dp = -1; dp <= 1; dp++)
          if (de < 0 || (de == 0 && dp < 0)) seed &= tot(e, p) > tot(e+de, p+dp);
          else if (de > 0 || dp > 0)         seed &= tot(e, p) >= tot(e+de, p+dp);
        s = 0;
        for (int de = -8; de <= 8; de++) for (int dp = -8; dp <= 8; dp++)
          if (de*de + dp*dp <= 16) s += tot(e+de, p+dp);
        c = cand[ce*PHI_CORE+cp];
        checks++;
        if (seed) begin
          int q; logic [31:0] exp_tob;
          nseeds++;
          q = s >> 3;
          exp_tob = {1'b0, 8'd0, 1'b0, 12'(q > 4095 ? 4095 : q), 5'(cp), 5'(ce)};
          exp_tob[31] = sat[e][p] | (q > 4095);
          if (!c.valid || c.key != 24'(s) || c.tob != exp_tob) begin
            failures++;
            if (failures < 5) $display("FAIL trial %0d (%0d,%0d): valid %b key %0d exp %0d tob %h exp %h",
                                        trial, ce, cp, c.valid, c.key, s, c.tob, exp_tob);
          end
        end else if (c.valid || c.tob != 0) begin
          failures++;
          if (failures < 5) $display("FAIL trial %0d (%0d,%0d): unexpected seed", trial, ce, cp);
        end
      end
    end
    checks++; if (nseeds < 40) begin failures++; $display("too few seeds %0d", nseeds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
