// tb_sigma_tuning: self-checking test of the sigma_n exponent register.
// Checks the reset value 5, that writes of 1..7 are taken, that 0 clamps to 1,
// and that the value holds while cfg_we is low.
module tb_sigma_tuning;
  import heatsense_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  sigma_n_t cfg_n, n;
  int checks = 0, failures = 0;

  sigma_tuning dut (.*);

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
    int unsigned expect_n;
    cfg_we = 0; cfg_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(n == 3'd5, "reset value");
    expect_n = 5;
    for (int i = 0; i < 500; i++) begin
      cfg_we = $urandom % 2;
      cfg_n  = sigma_n_t'($urandom);
      if (cfg_we) expect_n = (cfg_n == 0) ? 1 : cfg_n;
      @(negedge clk);
      check(n == sigma_n_t'(expect_n), $sformatf("n=%0d expected %0d", n, expect_n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
