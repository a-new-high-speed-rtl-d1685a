// round_window_sum: for every core tower, the sum of tower E_T over all towers within a
// circle of radius^2 = R2 (in tower units) centred on it.
//
// Each eta row is first turned into a running (prefix) sum along phi, so the part of the
// circle that lies in one row is a single difference of two prefix values; the circle is
// then the sum of 2*isqrt(R2)+1 row segments. R2 = 16 is the R = 0.4 window of the
// small-area jets; R2 = 2 and R2 = 8 give 3x3 and 5x5 squares. Purely combinational.
// The margin of the tower grid must be at least isqrt(R2) towers on every side.
module round_window_sum
  import jfex_pkg::*;
#(
  parameter int R2 = 16
) (
  input  et_t  et  [ETA_N][PHI_N],
  output sum_t sum [ETA_CORE][PHI_CORE]
);
  localparam int R = isqrt(R2);

  sum_t pre [ETA_N][PHI_N+1];

  always_comb begin
    for (int e = 0; e < ETA_N; e++) begin
      pre[e][0] = '0;
      for (int p = 0; p < PHI_N; p++) pre[e][p+1] = pre[e][p] + sum_t'(et[e][p]);
    end
  end

  for (genvar ce = 0; ce < ETA_CORE; ce++) begin : g_e
    for (genvar cp = 0; cp < PHI_CORE; cp++) begin : g_p
      localparam int E = ce + ETA_MARGIN;
      localparam int F = cp + PHI_MARGIN;
      always_comb begin
        sum_t acc;
        acc = '0;
        for (int d = -R; d <= R; d++) begin
          int hw;
          hw  = isqrt(R2 - d * d);
          acc = acc + (pre[E+d][F+hw+1] - pre[E+d][F-hw]);
        end
        sum[ce][cp] = acc;
      end
    end
  end
endmodule
