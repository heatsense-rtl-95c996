// tb_thresholds_determination: self-checking test of the threshold equations.
// For random means (including values near the top of the range, where the
// upper bound saturates) and every n in 1..7, the reference computes
// sigma = floor(Mean / 2^n) by integer division and checks
// upper = min(Mean + sigma, 65535) and lower = Mean - sigma.
module tb_thresholds_determination;
  import heatsense_pkg::*;

  feat_vec_t mean;
  sigma_n_t n;
  thresh_vec_t thresholds;
  int checks = 0, failures = 0;
  int saturated = 0;

  thresholds_determination dut (.*);

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
    for (int i = 0; i < 3000; i++) begin
      for (int f = 0; f < NUM_FEAT; f++)
        mean[f] = (i % 10 == 0) ? feat_t'(16'hF000 + $urandom % 16'h1000) : feat_t'($urandom % (100 << 8));
      n = sigma_n_t'(1 + $urandom % 7);
      #1;
      for (int f = 0; f < NUM_FEAT; f++) begin
        int unsigned sig, up;
        sig = mean[f] / (1 << n);
        up  = mean[f] + sig;
        if (up > 65535) begin up = 65535; saturated++; end
        check(thresholds[f].upper == feat_t'(up), $sformatf("upper mean=%0d n=%0d", mean[f], n));
        check(thresholds[f].lower == feat_t'(mean[f] - sig), $sformatf("lower mean=%0d n=%0d", mean[f], n));
      end
    end
    check(saturated > 0, "upper saturation never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
