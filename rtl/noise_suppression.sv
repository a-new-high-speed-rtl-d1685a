// noise_suppression: decodes the raw tower codes and zeroes towers below a threshold.
//
// Every tower of the 24 x 32 grid carries a 12-bit LAr code with a saturation bit and an
// 8-bit Tile code. The LAr code is multi-slope: the paper prints its range (-3.2 GeV to
// 800 GeV) and its finest and coarsest steps (25 MeV and 400 MeV); the breakpoints in
// jfex_pkg::lar_decode are this design's choice. Tile counts are 500 MeV each. Both are
// converted to linear E_T in 25 MeV units. A value below its threshold (thr_lar, thr_tile,
// 25 MeV units) is set to zero; negative LAr values are always zeroed. The saturation bit
// is passed on unchanged. The suppression rule itself is not given by the paper.
// Timing: registered on bc_stb, one BC of latency.
module noise_suppression
  import jfex_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       bc_stb,
  input  logic [11:0] lar_code  [ETA_N][PHI_N],
  input  logic        lar_sat   [ETA_N][PHI_N],
  input  logic [7:0]  tile_code [ETA_N][PHI_N],
  input  et_t         thr_lar,
  input  et_t         thr_tile,
  output et_t         lar_et    [ETA_N][PHI_N],
  output et_t         tile_et   [ETA_N][PHI_N],
  output logic        sat       [ETA_N][PHI_N]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int e = 0; e < ETA_N; e++)
        for (int p = 0; p < PHI_N; p++) begin
          lar_et[e][p]  <= '0;
          tile_et[e][p] <= '0;
          sat[e][p]     <= 1'b0;
        end
    end else if (bc_stb) begin
      for (int e = 0; e < ETA_N; e++)
        for (int p = 0; p < PHI_N; p++) begin
          logic signed [16:0] l;
          et_t                t;
          l = lar_decode(lar_code[e][p]);
          t = tile_decode(tile_code[e][p]);
          lar_et[e][p]  <= (l < signed'({1'b0, thr_lar}) || l < 0) ? '0 : et_t'(l);
          tile_et[e][p] <= (t < thr_tile) ? '0 : t;
          sat[e][p]     <= lar_sat[e][p];
        end
    end
  end
endmodule
