// global_sums: scalar E_T sum and the x/y components of the E_T vector over the core area.
//
// For the core towers, sum_et = sum of (LAr + Tile) E_T, E_x = sum E_T cos(phi) and
// E_y = sum E_T sin(phi). The towers are first summed along eta in each core phi column;
// the 16 column sums are then weighted by cos and sin of the column's phi. The full ring
// is taken as 64 bins (4 FPGAs x 16 core columns), and PHI_BASE is the ring index of this
// FPGA's first core column. cos/sin come from a quarter-wave table in Q10, entry
// k = round(1024 * cos(2*pi*k/64)), k = 0..16; sin(k) = cos(k + 48). The paper asks for
// the E_T sum and missing E_T; splitting them into E_x, E_y partial sums per FPGA (to be
// combined and turned into a magnitude downstream) is this design's choice.
// Output words: tob[0] = {sat, 7'b0, sum_et[23:0]}, tob[1] = E_x, tob[2] = E_y, all in
// 200 MeV units, E_x/E_y signed (arithmetic shift, so rounded towards minus infinity).
// Timing: registered on bc_stb, one BC of latency.
module global_sums
  import jfex_pkg::*;
#(
  parameter int PHI_BASE = 0
) (
  input  logic clk,
  input  logic rst,
  input  logic bc_stb,
  input  et_t  lar_et  [ETA_N][PHI_N],
  input  et_t  tile_et [ETA_N][PHI_N],
  input  logic sat     [ETA_N][PHI_N],
  output tob_t tob     [3]
);
  localparam int COS_Q10 [17] = '{1024, 1019, 1004, 980, 946, 903, 851, 792, 724,
                                  650, 569, 483, 392, 297, 200, 100, 0};

  // cos(2*pi*k/64) in Q10 by quarter-wave symmetry.
  function automatic int cos_q10(input int k);
    int m;
    m = k % 64;
    if (m <= 16)      return  COS_Q10[m];
    else if (m <= 32) return -COS_Q10[32 - m];
    else if (m <= 48) return -COS_Q10[m - 32];
    else              return  COS_Q10[64 - m];
  endfunction

  sum_t               col [PHI_CORE];
  sum_t               tot;
  logic signed [47:0] ex, ey;
  logic               any_sat;

  always_comb begin
    tot     = '0;
    ex      = '0;
    ey      = '0;
    any_sat = 1'b0;
    for (int p = 0; p < PHI_CORE; p++) begin
      col[p] = '0;
      for (int e = 0; e < ETA_CORE; e++) begin
        col[p]  = col[p] + SUM_W'(lar_et[e+ETA_MARGIN][p+PHI_MARGIN])
                         + SUM_W'(tile_et[e+ETA_MARGIN][p+PHI_MARGIN]);
        any_sat = any_sat | sat[e+ETA_MARGIN][p+PHI_MARGIN];
      end
      tot = tot + col[p];
      ex  = ex + 48'(signed'({1'b0, col[p]})) * 48'(signed'(cos_q10(PHI_BASE + p)));
      ey  = ey + 48'(signed'({1'b0, col[p]})) * 48'(signed'(cos_q10(PHI_BASE + p + 48)));
    end
  end

  logic signed [47:0] ex_q, ey_q;
  assign ex_q = ex >>> (10 + TOB_ET_SHIFT);
  assign ey_q = ey >>> (10 + TOB_ET_SHIFT);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 3; i++) tob[i] <= '0;
    end else if (bc_stb) begin
      tob[0] <= {any_sat, 7'd0, 24'(tot >> TOB_ET_SHIFT)};
      tob[1] <= ex_q[31:0];
      tob[2] <= ey_q[31:0];
    end
  end
endmodule
