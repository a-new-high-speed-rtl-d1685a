// tau_finder: tau candidates from local maxima of LAr + Tile E_T.
//
// Every core tower that is a local maximum above seed_thr is a tau seed. The tau E_T is
// the LAr + Tile sum over the 3x3 towers around the seed; the isolation is the LAr-only
// E_T in the ring between the 3x3 and the 5x5 square. The paper names the tau algorithm
// and shows LAr and Tile entering it separately, but gives no windows: the 3x3 core and
// 5x5 isolation ring are this design's choices. One candidate per core position; the TOB
// carries the isolation in bits 30:23 (200 MeV units, saturating at 255).
// Timing: outputs are registered on bc_stb, one BC after the inputs.
module tau_finder
  import jfex_pkg::*;
(
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
  sum_t core [ETA_CORE][PHI_CORE];
  sum_t em3  [ETA_CORE][PHI_CORE];
  sum_t em5  [ETA_CORE][PHI_CORE];

  always_comb
    for (int e = 0; e < ETA_N; e++)
      for (int p = 0; p < PHI_N; p++) tot[e][p] = lar_et[e][p] + tile_et[e][p];

  local_max_finder u_max (.et(tot), .seed_thr(seed_thr), .seed(seed));
  round_window_sum #(.R2(2)) u_core (.et(tot),    .sum(core));
  round_window_sum #(.R2(2)) u_em3  (.et(lar_et), .sum(em3));
  round_window_sum #(.R2(8)) u_em5  (.et(lar_et), .sum(em5));

  function automatic logic [7:0] iso_field(input sum_t s);
    sum_t q;
    q = s >> TOB_ET_SHIFT;
    return (q > sum_t'(255)) ? 8'hFF : q[7:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_CORE; i++) cand[i] <= '0;
    end else if (bc_stb) begin
      for (int ce = 0; ce < ETA_CORE; ce++)
        for (int cp = 0; cp < PHI_CORE; cp++) begin
          cand[ce*PHI_CORE+cp].valid <= seed[ce][cp];
          cand[ce*PHI_CORE+cp].key   <= seed[ce][cp] ? core[ce][cp] : '0;
          cand[ce*PHI_CORE+cp].tob   <= seed[ce][cp] ?
              make_tob(ce, cp, core[ce][cp], iso_field(em5[ce][cp] - em3[ce][cp]),
                       sat[ce+ETA_MARGIN][cp+PHI_MARGIN]) : '0;
        end
    end
  end
endmodule
