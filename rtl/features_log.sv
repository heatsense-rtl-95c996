// features_log: the Features Log of the anomaly detector.
//
// Holds the most recent sample of the three monitored features. F15 (router
// congestion) and F16 (router temperature) are taken from the inputs as they
// are; F17, the 2-cycle temperature average, is derived here as
// (T_now + T_previous) >> 1 from the current and the previous accepted
// temperature sample. The very first sample after reset has no predecessor and
// uses itself, so F17 equals F16 then.
//
// Interface: a sample is accepted in a cycle where sample_valid and
// sample_ready are both high. One cycle later the log outputs hold it and
// log_valid pulses for one cycle. The outputs stay unchanged until the next
// accepted sample.
//
// What a sample is (the sampling period, the congestion measure) is decided
// outside this block. That F17 is computed in hardware from two consecutive
// samples, truncating, is this design's choice.
module features_log
  import heatsense_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sample_valid,
  input  logic      sample_ready,
  input  feat_t     congestion,   // F15 raw value
  input  feat_t     temperature,  // F16 raw value
  output feat_vec_t features,     // logged F15, F16, F17
  output logic      log_valid
);

  feat_t prev_temp;
  logic  primed;
  logic  take;
  logic [FEAT_W:0] temp_sum;

  assign take     = sample_valid && sample_ready;
  assign temp_sum = {1'b0, temperature} + {1'b0, (primed ? prev_temp : temperature)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      features  <= '0;
      prev_temp <= '0;
      primed    <= 1'b0;
      log_valid <= 1'b0;
    end else begin
      log_valid <= take;
      if (take) begin
        features[F15_CONGESTION] <= congestion;
        features[F16_TEMP]       <= temperature;
        features[F17_TEMP_AVG2]  <= feat_t'(temp_sum >> 1);
        prev_temp                <= temperature;
        primed                   <= 1'b1;
      end
    end
  end

endmodule
