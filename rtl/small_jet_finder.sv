// small_jet_finder: small-area jet finder (sliding window, round window of R = 0.4).
//
// Tower E_T = LAr + Tile. Every core tower that is a local maximum above seed_thr
// (local_max_finder) becomes a jet whose E_T is the sum of all towers with
// d_eta^2 + d_phi^2 <= R2 around it (round_window_sum). One candidate per core position
// is produced: valid marks seeds, key is the jet E_T for sorting, tob is the 32-bit
// trigger object (core eta in bits 4:0, core phi in 9:5, E_T in 200 MeV units in 21:10,
// saturation in 31 when the seed tower is saturated or the E_T field overflows).
// The local-maximum seed and the round R = 0.4 window (radius^2 = 16 towers at 0.1 granularity) follow the paper; the 3x3 maximum rule, the seed threshold and the TOB bit layout are this design's choices.
// Timing: outputs are registered on bc_stb, one BC after the inputs.
module small_jet_finder
  import jfex_pkg::*;
#(
  parameter int R2 = 16
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  bc_stb,
  input  et_t   lar_et  [ETA_N][PHI_N],
  input  et_t   tile_et [ETA_N][PHI_N],
  input  logic  sat     [ETA_N][PHI_N],
  input  et_t   seed_thr,
  output cand_t cand    [N_CORE]
);
  et_t  tot  [ETA_N][PHI_N];
  logic seed [ETA_CORE][PHI_CORE];
  sum_t jsum [ETA_CORE][PHI_CORE];

  always_comb
    for (int e = 0; e < ETA_N; e++)
      for (int p = 0; p < PHI_N; p++) tot[e][p] = lar_et[e][p] + tile_et[e][p];

  local_max_finder u_max (.et(tot), .seed_thr(seed_thr), .seed(seed));
  round_window_sum #(.R2(R2)) u_sum (.et(tot), .sum(jsum));

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_CORE; i++) cand[i] <= '0;
    end else if (bc_stb) begin
      for (int ce = 0; ce < ETA_CORE; ce++)
        for (int cp = 0; cp < PHI_CORE; cp++) begin
          cand[ce*PHI_CORE+cp].valid <= seed[ce][cp];
          cand[ce*PHI_CORE+cp].key   <= seed[ce][cp] ? jsum[ce][cp] : '0;
          cand[ce*PHI_CORE+cp].tob   <= seed[ce][cp] ?
              make_tob(ce, cp, jsum[ce][cp], 8'd0, sat[ce+ETA_MARGIN][cp+PHI_MARGIN]) : '0;
        end
    end
  end
endmodule
