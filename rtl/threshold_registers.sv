// threshold_registers: the Approximate Threshold Registers.
//
// Six registers, an upper and a lower threshold for each of F15, F16 and F17,
// loaded together when load is high. Until the first load after reset they
// hold the widest possible window (lower = 0, upper = all ones) and valid is
// low, so that no feature can be out of range before a mean exists; valid
// goes high with the first load and stays high. The register layout (U/L for
// F15, F16, F17) follows the router figure; the reset window is this design's
// choice.
//
// Timing: values presented with load appear on thresholds the next cycle,
// together with a one-cycle loaded pulse.
module threshold_registers
  import heatsense_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  thresh_vec_t thr_in,
  output thresh_vec_t thresholds,
  output logic        valid,
  output logic        loaded
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned f = 0; f < NUM_FEAT; f++) begin
        thresholds[f].upper <= '1;
        thresholds[f].lower <= '0;
      end
      valid  <= 1'b0;
      loaded <= 1'b0;
    end else begin
      loaded <= load;
      if (load) begin
        thresholds <= thr_in;
        valid      <= 1'b1;
      end
    end
  end

endmodule
