// thresholds_determination: approximate anomaly thresholds from the mean.
//
// For every feature the standard deviation is replaced by
//     sigma_n = Mean >> n          (n from the sigma tuning register, 1..7)
// and the thresholds are
//     upper = Mean + sigma_n,  lower = Mean - sigma_n.
// Only a shifter, an adder and a subtractor per feature are needed; there is
// no multiplier and no divider. The lower bound cannot underflow because
// sigma_n is at most Mean/2. The upper bound saturates at the largest
// representable value (a choice of this design; with the default Q8.8 format
// it cannot overflow for temperatures or congestion below 170).
//
// Purely combinational: thresholds follow mean and n in the same cycle.
module thresholds_determination
  import heatsense_pkg::*;
(
  input  feat_vec_t   mean,
  input  sigma_n_t    n,
  output thresh_vec_t thresholds
);

  always_comb begin
    for (int unsigned f = 0; f < NUM_FEAT; f++) begin
      feat_t           sigma;
      logic [FEAT_W:0] up;
      sigma = mean[f] >> n;
      up    = {1'b0, mean[f]} + {1'b0, sigma};
      thresholds[f].upper = up[FEAT_W] ? '1 : up[FEAT_W-1:0];
      thresholds[f].lower = mean[f] - sigma;
    end
  end

endmodule
