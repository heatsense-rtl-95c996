// tb_threshold_registers: self-checking test of the six threshold registers.
// Checks the reset window (lower 0, upper all ones, valid low), that a load
// stores all six values and raises valid, that loaded pulses one cycle after
// load, and that the registers hold without load.
module tb_threshold_registers;
  import heatsense_pkg::*;

  logic clk = 0, rst_n = 0;
  logic load, valid, loaded;
  thresh_vec_t thr_in, thresholds;
  int checks = 0, failures = 0;

  threshold_registers dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    thresh_vec_t expect_v;
    bit exp_valid = 0;
    load = 0; thr_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NUM_FEAT; f++) begin
      expect_v[f].upper = 16'hFFFF;
      expect_v[f].lower = 16'h0000;
    end
    check(thresholds == expect_v && !valid && !loaded, "reset window");
    for (int i = 0; i < 1000; i++) begin
      load   = ($urandom % 3) == 0;
      for (int f = 0; f < NUM_FEAT; f++) begin
        thr_in[f].upper = feat_t'($urandom);
        thr_in[f].lower = feat_t'($urandom);
      end
      if (load) begin expect_v = thr_in; exp_valid = 1; end
      @(negedge clk);
      check(thresholds == expect_v, $sformatf("contents at %0d", i));
      check(valid == exp_valid, "valid");
      check(loaded == load, "loaded pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
