// tb_features_log: self-checking test of the features log.
// Offers random congestion/temperature samples with random valid and ready,
// and checks after every accepted sample that F15 and F16 are the sample and
// F17 is floor((T + T_prev)/2), with T_prev = T for the first sample; checks
// that log_valid pulses exactly one cycle after acceptance and that the log
// holds its value when nothing is accepted.
module tb_features_log;
  import heatsense_pkg::*;

  logic clk = 0, rst_n = 0;
  logic sample_valid, sample_ready;
  feat_t congestion, temperature;
  feat_vec_t features;
  logic log_valid;
  int checks = 0, failures = 0;

  features_log dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned prev_t;
    bit primed = 0;
    feat_vec_t expect_v;
    bit took;
    sample_valid = 0; sample_ready = 0; congestion = 0; temperature = 0;
    expect_v = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(log_valid == 0 && features == '0, "reset state");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      sample_valid = ($urandom % 3) != 0;
      sample_ready = ($urandom % 4) != 0;
      congestion   = feat_t'($urandom % (101 << 8));
      temperature  = feat_t'(($urandom % (60 << 8)) + (30 << 8));
      took = sample_valid && sample_ready;
      if (took) begin
        int unsigned t_prev_use;
        t_prev_use = primed ? prev_t : int'(temperature);
        expect_v[F15_CONGESTION] = congestion;
        expect_v[F16_TEMP]       = temperature;
        expect_v[F17_TEMP_AVG2]  = feat_t'((int'(temperature) + t_prev_use) / 2);
        prev_t = temperature;
        primed = 1;
      end
      @(negedge clk);
      check(log_valid == took, "log_valid timing");
      check(features == expect_v, $sformatf("log contents at step %0d", i));
      sample_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
