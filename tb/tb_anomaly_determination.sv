// tb_anomaly_determination: self-checking test of the feature classification.
// Random features are placed below, inside, on the edges of, and above random
// threshold bands; the reference classifies each (strictly above upper =
// Upper, strictly below lower = Lower, else Normal) and counts the features
// out of range. Every level 0..3 must occur.
module tb_anomaly_determination;
  import heatsense_pkg::*;

  feat_vec_t features;
  thresh_vec_t thresholds;
  feat_status_vec_t status;
  anomaly_level_e level;
  int checks = 0, failures = 0;
  int seen [4] = '{0, 0, 0, 0};

  anomaly_determination dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int cnt;
      feat_status_e exp_s [NUM_FEAT];
      cnt = 0;
      for (int f = 0; f < NUM_FEAT; f++) begin
        int unsigned lo, hi;
        lo = 1000 + $urandom % 20000;
        hi = lo + $urandom % 5000;
        thresholds[f].lower = feat_t'(lo);
        thresholds[f].upper = feat_t'(hi);
        case ($urandom % 5)
          0: features[f] = feat_t'(lo - 1 - $urandom % 900);
          1: features[f] = feat_t'(hi + 1 + $urandom % 900);
          2: features[f] = feat_t'(lo);
          3: features[f] = feat_t'(hi);
          default: features[f] = feat_t'(lo + $urandom % (hi - lo + 1));
        endcase
        if (features[f] > hi)      exp_s[f] = FS_UPPER;
        else if (features[f] < lo) exp_s[f] = FS_LOWER;
        else                       exp_s[f] = FS_NORMAL;
        if (exp_s[f] != FS_NORMAL) cnt++;
      end
      #1;
      for (int f = 0; f < NUM_FEAT; f++) check(status[f] == exp_s[f], $sformatf("status of feature %0d", f));
      check(int'(level) == cnt, $sformatf("level %0d expected %0d", level, cnt));
      seen[cnt]++;
    end
    for (int l = 0; l < 4; l++) check(seen[l] > 0, $sformatf("level %0d never seen", l));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
