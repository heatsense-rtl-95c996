// input_port_gate: applies the port shutdown at the router's input buffers.
//
// Sits between each incoming link and its input buffer. An open port passes
// flits and back-pressure straight through. A shut port still accepts every
// flit offered on its link, but drops it instead of writing it into the
// buffer, and the drop is counted; the upstream router therefore never stalls
// on an isolated router. The effect of a shutdown, that traffic on shut ports
// is lost, follows the design's description and its packet-drop-rate
// results; dropping rather than stalling, the per-port counters and the flit
// width are this design's choices.
//
// Interface: per port a valid/ready flit link in and out, port_open from the
// shutdown decision, and a saturating drop counter per port. Combinational
// from link to buffer; the counters update at the clock edge. The flit data
// itself is wired straight through: only valid and ready are gated.
module input_port_gate
  import heatsense_pkg::*;
#(
  parameter int unsigned FLIT_W = 32,
  parameter int unsigned CNT_W  = 32
)(
  input  logic                           clk,
  input  logic                           rst_n,
  input  port_mask_t                     port_open,
  input  logic [NUM_PORTS-1:0]           in_valid,
  input  logic [NUM_PORTS-1:0][FLIT_W-1:0] in_flit,
  output logic [NUM_PORTS-1:0]           in_ready,
  output logic [NUM_PORTS-1:0]           buf_valid,
  output logic [NUM_PORTS-1:0][FLIT_W-1:0] buf_flit,
  input  logic [NUM_PORTS-1:0]           buf_ready,
  output logic [NUM_PORTS-1:0][CNT_W-1:0] drop_count
);

  always_comb begin
    for (int unsigned p = 0; p < NUM_PORTS; p++) begin
      buf_valid[p] = in_valid[p] && port_open[p];
      buf_flit[p]  = in_flit[p];
      in_ready[p]  = port_open[p] ? buf_ready[p] : 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drop_count <= '0;
    end else begin
      for (int unsigned p = 0; p < NUM_PORTS; p++)
        if (in_valid[p] && !port_open[p] && (drop_count[p] != '1))
          drop_count[p] <= drop_count[p] + 1'b1;
    end
  end

endmodule
