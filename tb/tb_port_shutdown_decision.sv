// tb_port_shutdown_decision: self-checking test of the port shutdown action.
// Changes the level at random and checks, one cycle after each update, that
// 6, 2, 1 or 0 ports are open for Normal, Level 1, 2, 3; that the mask holds
// between updates; and that the random choice really varies: over the run
// every one of the 15 two-port masks of Level 1 and every one of the 6
// one-port masks of Level 2 must be chosen at least once.
module tb_port_shutdown_decision;
  import heatsense_pkg::*;

  logic clk = 0, rst_n = 0;
  logic update;
  anomaly_level_e level;
  port_mask_t port_open;
  int checks = 0, failures = 0;
  bit seen_mask [64];

  port_shutdown_decision dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    port_mask_t held;
    int n1 = 0, n2 = 0;
    int want;
    foreach (seen_mask[m]) seen_mask[m] = 0;
    update = 0; level = LVL_NORMAL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(port_open == 6'b111111, "reset: all ports open");
    for (int i = 0; i < 4000; i++) begin
      level  = anomaly_level_e'($urandom % 4);
      update = 1;
      @(negedge clk);
      update = 0;
      want = (level == LVL_NORMAL) ? 6 : (level == LVL_1) ? 2 : (level == LVL_2) ? 1 : 0;
      check($countones(port_open) == want, $sformatf("level %0d: %b open", level, port_open));
      seen_mask[port_open] = 1;
      held = port_open;
      repeat (1 + $urandom % 7) @(negedge clk);
      check(port_open == held, "mask held between updates");
    end
    for (int m = 0; m < 64; m++) begin
      if ($countones(m) == 2 && seen_mask[m]) n1++;
      if ($countones(m) == 1 && seen_mask[m]) n2++;
    end
    check(n1 == 15, $sformatf("only %0d of 15 Level-1 masks chosen", n1));
    check(n2 == 6, $sformatf("only %0d of 6 Level-2 masks chosen", n2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
