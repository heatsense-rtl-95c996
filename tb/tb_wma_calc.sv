// tb_wma_calc: self-checking test of the weighted moving average.
// The reference computes (w1*x + w0*WMA)/(w1+w0) with a true integer division
// and weights 3 inside [t1, t2), 1 elsewhere, the first sample loading the
// mean directly. Observations are drawn below, inside and above the band so
// that all four weight combinations occur; each is counted and must occur.
module tb_wma_calc;
  import heatsense_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  feat_t x, t1, t2, wma;
  int checks = 0, failures = 0;
  int combo [4] = '{0, 0, 0, 0};

  wma_calc dut (.*);

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

  function automatic int unsigned w(int unsigned v);
    return (v >= t1 && v < t2) ? 3 : 1;
  endfunction

  initial begin
    int unsigned ref_wma = 0, w1, w0;
    bit primed = 0;
    in_valid = 0; x = 0;
    t1 = feat_t'(50 << 8); t2 = feat_t'(80 << 8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      case ($urandom % 3)
        0: x = feat_t'($urandom % (50 << 8));
        1: x = feat_t'((50 << 8) + $urandom % (30 << 8));
        default: x = feat_t'((80 << 8) + $urandom % (40 << 8));
      endcase
      if (in_valid) begin
        if (!primed) ref_wma = x;
        else begin
          w1 = w(x); w0 = w(ref_wma);
          combo[(w1 == 3 ? 2 : 0) + (w0 == 3 ? 1 : 0)]++;
          ref_wma = (w1 * x + w0 * ref_wma) / (w1 + w0);
        end
        primed = 1;
      end
      @(negedge clk);
      check(out_valid == in_valid, "out_valid timing");
      check(wma == feat_t'(ref_wma), $sformatf("wma %0d expected %0d at %0d", wma, ref_wma, i));
      in_valid = 0;
    end
    for (int c = 0; c < 4; c++) check(combo[c] > 0, $sformatf("weight combination %0d never happened", c));
    $display("weight combos (w1,w0)=(1,1):%0d (1,3):%0d (3,1):%0d (3,3):%0d", combo[0], combo[1], combo[2], combo[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
