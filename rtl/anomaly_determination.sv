// anomaly_determination: compares the logged features with their thresholds.
//
// Each feature is classified as Upper (above its upper threshold), Lower
// (below its lower threshold) or Normal, and the anomaly level is the number
// of features that are not Normal: 0 is Normal operation, and Levels 1, 2 and
// 3 mean one, two or all three features out of range. A feature equal to a
// threshold counts as Normal (the description does not say; this design
// treats the thresholds as the edges of the allowed band).
//
// Purely combinational.
module anomaly_determination
  import heatsense_pkg::*;
(
  input  feat_vec_t        features,
  input  thresh_vec_t      thresholds,
  output feat_status_vec_t status,
  output anomaly_level_e   level
);

  logic [1:0] count;

  always_comb begin
    count = '0;
    for (int unsigned f = 0; f < NUM_FEAT; f++) begin
      if (features[f] > thresholds[f].upper)      status[f] = FS_UPPER;
      else if (features[f] < thresholds[f].lower) status[f] = FS_LOWER;
      else                                        status[f] = FS_NORMAL;
      if (status[f] != FS_NORMAL) count = count + 2'd1;
    end
    level = anomaly_level_e'(count);
  end

endmodule
