// anomaly_level_register: the Anomaly Level Register and its state machine.
//
// Holds the detector's state, one of Normal, Level 1, Level 2 and Level 3.
// On every evaluation (load high) the state becomes the level just computed,
// so any state can follow any other: one, two or three features out of
// boundary lead to Level 1, 2 or 3 from wherever the machine is, and a lower
// count leads down to the matching lower state, down to Normal. This is the
// fully connected four-state diagram of the design, whose downward arcs are
// all labelled "Port Shutdown" (the shutdown is re-decided on entry).
// changed pulses for one cycle when a load moves the state.
//
// Timing: the state and changed are registered, one cycle after load.
module anomaly_level_register
  import heatsense_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  anomaly_level_e level_in,
  output anomaly_level_e state,
  output logic           changed
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= LVL_NORMAL;
      changed <= 1'b0;
    end else begin
      changed <= load && (level_in != state);
      if (load) state <= level_in;
    end
  end

endmodule
