// port_shutdown_decision: the action mechanism of the anomaly detector.
//
// Turns the anomaly level into a mask of open router ports (1 = open):
//     Normal  : all 6 ports open
//     Level 1 : 4 ports shut at random, 2 stay open (1/3 of the capacity)
//     Level 2 : 5 ports shut at random, 1 stays open (1/6 of the capacity)
//     Level 3 : all 6 ports shut, the router is isolated
// The counts come from the design description. The randomness comes from a
// free-running 16-bit maximal-length LFSR (x^16 + x^14 + x^13 + x^11 + 1,
// seed SEED). When the level changes (update high), two 8-bit slices r_a and
// r_b of the LFSR choose the open ports: a = r_a mod 6 and, for Level 1,
// b = (a + 1 + r_b mod 5) mod 6, which is always different from a. The mask is
// held while the level stays the same, so an ongoing anomaly does not make
// ports flap; this, the LFSR and the selection rule are this design's choices.
//
// Interface: level is the current anomaly state, update pulses when it has
// changed. The mask is registered: it changes the cycle after update.
module port_shutdown_decision
  import heatsense_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           update,
  input  anomaly_level_e level,
  output port_mask_t     port_open
);

  logic [15:0] lfsr;
  logic [2:0]  a, b;
  port_mask_t  next_mask;

  // Fibonacci LFSR, taps 16, 14, 13, 11.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= (SEED == 16'h0) ? 16'h1 : SEED;
    else        lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
  end

  always_comb begin
    a = 3'(lfsr[7:0] % 8'd6);
    b = 3'((32'(a) + 1 + 32'(lfsr[15:8] % 8'd5)) % 6);
    case (level)
      LVL_NORMAL: next_mask = '1;
      LVL_1:      next_mask = port_mask_t'((6'b1 << a) | (6'b1 << b));
      LVL_2:      next_mask = port_mask_t'(6'b1 << a);
      default:    next_mask = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      port_open <= '1;
    else if (update) port_open <= next_mask;
  end

  // The number of open ports always matches the level.
  a_open_count: assert property (@(posedge clk) disable iff (!rst_n)
    $past(update) |-> ($countones(port_open) == open_ports($past(level))));

endmodule
