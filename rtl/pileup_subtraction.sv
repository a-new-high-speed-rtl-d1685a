// pileup_subtraction: removes a per-eta-row pile-up pedestal from the LAr E_T.
//
// For each tower, lar_out = max(lar_in - rho[eta], 0); the Tile E_T and the saturation
// flag pass through. rho is programmable per eta row (25 MeV units). The paper names
// pile-up subtraction as an implemented step between noise suppression and the
// algorithms but does not describe it; the per-row LAr pedestal is the simplest form and
// is this design's choice. Timing: registered on bc_stb, one BC of latency.
module pileup_subtraction
  import jfex_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic bc_stb,
  input  et_t  lar_in   [ETA_N][PHI_N],
  input  et_t  tile_in  [ETA_N][PHI_N],
  input  logic sat_in   [ETA_N][PHI_N],
  input  et_t  rho      [ETA_N],
  output et_t  lar_out  [ETA_N][PHI_N],
  output et_t  tile_out [ETA_N][PHI_N],
  output logic sat_out  [ETA_N][PHI_N]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int e = 0; e < ETA_N; e++)
        for (int p = 0; p < PHI_N; p++) begin
          lar_out[e][p]  <= '0;
          tile_out[e][p] <= '0;
          sat_out[e][p]  <= 1'b0;
        end
    end else if (bc_stb) begin
      for (int e = 0; e < ETA_N; e++)
        for (int p = 0; p < PHI_N; p++) begin
          lar_out[e][p]  <= (lar_in[e][p] > rho[e]) ? lar_in[e][p] - rho[e] : '0;
          tile_out[e][p] <= tile_in[e][p];
          sat_out[e][p]  <= sat_in[e][p];
        end
    end
  end
endmodule
