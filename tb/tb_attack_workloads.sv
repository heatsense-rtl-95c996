// tb_attack_workloads: the two Trojan behaviours under sigma_5, sigma_6 and
// sigma_7.
//
// One temperature/congestion trace of 1500 samples is generated: 60 degC and
// 30 % congestion with sensor noise, and attacks that start at random times
// with a random amplitude of 2..8 degC. It contains attacks of both
// behaviours: behaviour 1 reports the temperature low for 20 samples (credit
// phase) and then high by the same amount for 20 (exploitation phase);
// behaviour 2 does the opposite. The same trace is replayed through the
// detector three times, with sigma_n = 5, 6 and 7, resetting in between.
//
// Checks:
//  - nesting: the moving averages do not depend on n and the sigma_7 band lies
//    inside the sigma_6 band, which lies inside the sigma_5 band, so for every
//    sample level(sigma_7) >= level(sigma_6) >= level(sigma_5);
//  - every phase edge of an attack of 4 degC or more is flagged (level >= 1)
//    under every sigma, and the ports are then reduced;
//  - each anomaly level occurs at least once over the three runs.
// It prints, per sigma, how many attack and how many clean samples were
// flagged, the detection/false-alarm trade-off that the sigma choice sets.
module tb_attack_workloads;
  import heatsense_pkg::*;

  localparam int N = 1500;

  logic clk = 0, rst_n = 0;
  logic sample_valid, sample_ready;
  feat_t congestion, temperature;
  logic sigma_we;
  sigma_n_t sigma_n_cfg;
  feat_vec_t wma_t1, wma_t2;
  logic [NUM_PORTS-1:0] in_valid, in_ready, buf_valid, buf_ready;
  logic [NUM_PORTS-1:0][31:0] in_flit, buf_flit;
  feat_vec_t features, means;
  sigma_n_t sigma_n;
  thresh_vec_t thresholds;
  feat_status_vec_t feat_status;
  logic eval_valid;
  anomaly_level_e anomaly_level_now, anomaly_state;
  port_mask_t port_open;
  logic [NUM_PORTS-1:0][31:0] drop_count;

  int checks = 0, failures = 0;

  heatsense_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned tr_t [N], tr_c [N];
  bit          tr_attack [N];
  bit          tr_edge [N];      // first sample of a phase of >= 4 degC
  int          lvl [3][N];

  task automatic make_trace();
    int left = 0, amp = 0;
    bit b2 = 0;
    for (int i = 0; i < N; i++) begin
      tr_edge[i] = 0;
      if (left == 0 && i > 20 && ($urandom % 50) == 0) begin
        left = 40; amp = 2 + $urandom % 7; b2 = $urandom % 2;
      end
      tr_t[i] = (60 << 8) + ($urandom % 80) - 40;
      tr_c[i] = (30 << 8) + ($urandom % 64) - 32;
      tr_attack[i] = left > 0;
      if (left > 0) begin
        if ((left == 40 || left == 20) && amp >= 4) tr_edge[i] = 1;
        if (left > 20) tr_t[i] = b2 ? tr_t[i] + (amp << 8) : tr_t[i] - (amp << 8);
        else           tr_t[i] = b2 ? tr_t[i] - (amp << 8) : tr_t[i] + (amp << 8);
        if (left == 40 && ($urandom % 3) == 0) tr_c[i] += (20 << 8);
        left--;
      end
    end
  endtask

  initial begin
    int seen [4] = '{0, 0, 0, 0};
    make_trace();
    in_valid = '1; buf_ready = '1; in_flit = '0;
    wma_t1[0] = feat_t'(50 << 8); wma_t2[0] = feat_t'(90 << 8);
    wma_t1[1] = feat_t'(60 << 8); wma_t2[1] = feat_t'(85 << 8);
    wma_t1[2] = feat_t'(60 << 8); wma_t2[2] = feat_t'(85 << 8);
    for (int s = 0; s < 3; s++) begin
      int fa, det, na, nc;
      fa = 0; det = 0; na = 0; nc = 0;
      rst_n = 0; sample_valid = 0; sigma_we = 0; sigma_n_cfg = 0;
      congestion = 0; temperature = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      sigma_we = 1; sigma_n_cfg = sigma_n_t'(5 + s);
      @(negedge clk);
      sigma_we = 0;
      for (int i = 0; i < N; i++) begin
        sample_valid = 1; congestion = feat_t'(tr_c[i]); temperature = feat_t'(tr_t[i]);
        @(negedge clk);
        sample_valid = 0;
        while (!eval_valid) @(negedge clk);
        lvl[s][i] = int'(anomaly_level_now);
        seen[lvl[s][i]]++;
        repeat (2) @(negedge clk);
        if (tr_edge[i]) begin
          check(lvl[s][i] >= 1, $sformatf("sigma_%0d missed attack edge at sample %0d", 5 + s, i));
          check($countones(port_open) <= 2, "ports not reduced at attack edge");
        end
        if (tr_attack[i]) begin na++; if (lvl[s][i] > 0) det++; end
        else begin nc++; if (lvl[s][i] > 0) fa++; end
      end
      $display("sigma_%0d: attack samples flagged %0d of %0d, clean samples flagged %0d of %0d",
               5 + s, det, na, fa, nc);
    end
    for (int i = 0; i < N; i++) begin
      check(lvl[2][i] >= lvl[1][i] && lvl[1][i] >= lvl[0][i],
            $sformatf("levels not nested at sample %0d: %0d %0d %0d", i, lvl[0][i], lvl[1][i], lvl[2][i]));
    end
    for (int l = 0; l < 4; l++) check(seen[l] > 0, $sformatf("level %0d never reached", l));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
