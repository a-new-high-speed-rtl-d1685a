// local_max_finder: marks every core tower that is a local E_T maximum above a threshold.
//
// A core tower is a seed when its E_T exceeds seed_thr and is a maximum among its eight
// neighbours. Equal values are resolved by position so that a plateau gives exactly one
// seed: the tower must be strictly greater than neighbours that come before it in
// (eta, phi) order and greater or equal to those after it. The 3x3 neighbourhood and the
// tie rule are this design's choice; the paper only says the sliding window identifies
// the local maximum. Purely combinational.
module local_max_finder
  import jfex_pkg::*;
(
  input  et_t  et       [ETA_N][PHI_N],
  input  et_t  seed_thr,
  output logic seed     [ETA_CORE][PHI_CORE]
);
  for (genvar ce = 0; ce < ETA_CORE; ce++) begin : g_e
    for (genvar cp = 0; cp < PHI_CORE; cp++) begin : g_p
      localparam int E = ce + ETA_MARGIN;
      localparam int F = cp + PHI_MARGIN;
      always_comb begin
        logic ok;
        ok = et[E][F] > seed_thr;
        for (int de = -1; de <= 1; de++)
          for (int dp = -1; dp <= 1; dp++) begin
            if (de < 0 || (de == 0 && dp < 0)) ok = ok && (et[E][F] >  et[E+de][F+dp]);
            else if (de > 0 || dp > 0)         ok = ok && (et[E][F] >= et[E+de][F+dp]);
          end
        seed[ce][cp] = ok;
      end
    end
  end
endmodule
