// tb_input_port_gate: self-checking test of the input port shutdown gate.
// Random traffic, buffer back-pressure and port masks; checks that open ports
// pass flits and ready unchanged, that shut ports never write the buffer but
// still accept (ready high), and that each port's drop counter equals the
// number of flits offered while the port was shut.
module tb_input_port_gate;
  import heatsense_pkg::*;

  localparam int unsigned FLIT_W = 32;
  localparam int unsigned CNT_W  = 32;
  logic clk = 0, rst_n = 0;
  port_mask_t port_open;
  logic [NUM_PORTS-1:0] in_valid, in_ready, buf_valid, buf_ready;
  logic [NUM_PORTS-1:0][FLIT_W-1:0] in_flit, buf_flit;
  logic [NUM_PORTS-1:0][CNT_W-1:0] drop_count;
  int checks = 0, failures = 0;

  input_port_gate dut (.*);

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
    int unsigned drops [NUM_PORTS];
    foreach (drops[p]) drops[p] = 0;
    port_open = '1; in_valid = 0; in_flit = '0; buf_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      if (i % 50 == 0) port_open = port_mask_t'($urandom);
      in_valid  = NUM_PORTS'($urandom);
      buf_ready = NUM_PORTS'($urandom);
      for (int p = 0; p < NUM_PORTS; p++) in_flit[p] = $urandom;
      #1;
      for (int p = 0; p < NUM_PORTS; p++) begin
        check(buf_valid[p] == (in_valid[p] && port_open[p]), "buf_valid");
        check(buf_flit[p] == in_flit[p], "buf_flit");
        check(in_ready[p] == (port_open[p] ? buf_ready[p] : 1'b1), "in_ready");
        if (in_valid[p] && !port_open[p]) drops[p]++;
      end
      @(negedge clk);
      for (int p = 0; p < NUM_PORTS; p++)
        check(drop_count[p] == drops[p], $sformatf("drop count port %0d", p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
