// tb_anomaly_level_register: self-checking test of the anomaly state register.
// Loads random levels at random times and checks the state and the changed
// pulse against a reference; counts every one of the 12 transitions between
// distinct states of the four-state diagram and requires each to occur.
module tb_anomaly_level_register;
  import heatsense_pkg::*;

  logic clk = 0, rst_n = 0;
  logic load, changed;
  anomaly_level_e level_in, state;
  int checks = 0, failures = 0;
  int trans [4][4];

  anomaly_level_register dut (.*);

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
    anomaly_level_e exp_state = LVL_NORMAL;
    bit exp_changed;
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) trans[a][b] = 0;
    load = 0; level_in = LVL_NORMAL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == LVL_NORMAL && !changed, "reset state");
    for (int i = 0; i < 3000; i++) begin
      load     = ($urandom % 2) == 1;
      level_in = anomaly_level_e'($urandom % 4);
      exp_changed = load && (level_in != exp_state);
      if (exp_changed) trans[exp_state][level_in]++;
      if (load) exp_state = level_in;
      @(negedge clk);
      check(state == exp_state, "state");
      check(changed == exp_changed, "changed pulse");
    end
    for (int a = 0; a < 4; a++)
      for (int b = 0; b < 4; b++)
        if (a != b) check(trans[a][b] > 0, $sformatf("transition %0d->%0d never taken", a, b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
