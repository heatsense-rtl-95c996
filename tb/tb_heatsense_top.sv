// tb_heatsense_top: end-to-end test of the anomaly detector at its default
// parameters.
//
// A router temperature trace (about 60 degC with sensor noise) and a
// congestion trace (about 30 %) are fed as samples with random gaps. At random
// times a Trojan-style manipulation is applied: the reported temperature is
// first pulled down (credit phase) and then pushed up by the same amount
// (exploitation phase), or the other way round (the second Trojan
// behaviour), and congestion bursts are added, so that one, two and
// three features leave their bands. Incoming flits are offered on all six
// ports throughout.
//
// A behavioural reference model, written from the equations and independent
// of the RTL (true divisions instead of shifts), predicts for every accepted
// sample the logged features, the three moving averages, the six thresholds
// and the anomaly level. The test checks all of them at eval_valid, checks the
// anomaly state one cycle later, the number of open ports and the latency
// from sample to port mask (5 cycles), and the drop counters against the
// flits offered to shut ports. Midway the sigma exponent is switched from 5
// to 7. Each mechanism must have happened: every anomaly level, Upper and
// Lower classifications, weight-3 averaging, sample back-pressure, the sigma
// switch, dropped flits and more than one random Level-1 mask.
module tb_heatsense_top;
  import heatsense_pkg::*;

  localparam int unsigned FLIT_W = 32;
  localparam int unsigned CNT_W  = 32;
  localparam int NUM_SAMPLES = 4000;

  logic clk = 0, rst_n = 0;
  logic sample_valid, sample_ready;
  feat_t congestion, temperature;
  logic sigma_we;
  sigma_n_t sigma_n_cfg;
  feat_vec_t wma_t1, wma_t2;
  logic [NUM_PORTS-1:0] in_valid, in_ready, buf_valid, buf_ready;
  logic [NUM_PORTS-1:0][FLIT_W-1:0] in_flit, buf_flit;
  feat_vec_t features, means;
  sigma_n_t sigma_n;
  thresh_vec_t thresholds;
  feat_status_vec_t feat_status;
  logic eval_valid;
  anomaly_level_e anomaly_level_now, anomaly_state;
  port_mask_t port_open;
  logic [NUM_PORTS-1:0][CNT_W-1:0] drop_count;

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int unsigned m_prev_t, m_wma [NUM_FEAT];
  bit m_primed = 0;
  int unsigned m_n = 5;
  int unsigned e_feat [NUM_FEAT], e_up [NUM_FEAT], e_lo [NUM_FEAT];
  int e_level;

  function automatic int unsigned weight(int unsigned v, int f);
    return (v >= wma_t1[f] && v < wma_t2[f]) ? 3 : 1;
  endfunction

  // Mechanism counters.
  int lvl_seen [4] = '{0, 0, 0, 0};
  int n_upper = 0, n_lower = 0, n_heavy = 0, n_backpressure = 0, n_sigma_switch = 0;
  int n_lvl1_masks = 0;
  bit l1_mask_seen [64];

  task automatic model_sample(int unsigned c, int unsigned t);
    int unsigned tp;
    tp = m_primed ? m_prev_t : t;
    e_feat[0] = c;
    e_feat[1] = t;
    e_feat[2] = (t + tp) / 2;
    m_prev_t = t;
    for (int f = 0; f < NUM_FEAT; f++) begin
      if (!m_primed) m_wma[f] = e_feat[f];
      else begin
        int unsigned w1, w0;
        w1 = weight(e_feat[f], f);
        w0 = weight(m_wma[f], f);
        if (w1 == 3 || w0 == 3) n_heavy++;
        m_wma[f] = (w1 * e_feat[f] + w0 * m_wma[f]) / (w1 + w0);
      end
    end
    m_primed = 1;
    e_level = 0;
    for (int f = 0; f < NUM_FEAT; f++) begin
      int unsigned s;
      s = m_wma[f] / (1 << m_n);
      e_up[f] = m_wma[f] + s;
      e_lo[f] = m_wma[f] - s;
      if (e_feat[f] > e_up[f] || e_feat[f] < e_lo[f]) e_level++;
    end
  endtask

  // ---------------- flit traffic and drop bookkeeping ----------------
  int unsigned offered_shut [NUM_PORTS];
  always @(negedge clk) begin
    if (rst_n) begin
      in_valid  <= NUM_PORTS'($urandom);
      buf_ready <= NUM_PORTS'($urandom);
      for (int p = 0; p < NUM_PORTS; p++) in_flit[p] <= $urandom;
    end
  end
  always @(posedge clk) begin
    if (rst_n)
      for (int p = 0; p < NUM_PORTS; p++)
        if (in_valid[p] && !port_open[p]) offered_shut[p]++;
  end

  // ---------------- stimulus and checking ----------------
  initial begin
    int unsigned base_t, base_c, t, c;
    int attack_left = 0, attack_amp = 0, burst_left = 0;
    bit attack_b2 = 0;
    int n_attack [2] = '{0, 0};
    int accepted = 0;
    anomaly_level_e prev_state;
    foreach (offered_shut[p]) offered_shut[p] = 0;
    foreach (l1_mask_seen[m]) l1_mask_seen[m] = 0;
    sample_valid = 0; congestion = 0; temperature = 0;
    sigma_we = 0; sigma_n_cfg = 0;
    in_valid = 0; buf_ready = 0; in_flit = '0;
    // weight-3 bands: congestion 50..90 %, temperatures 60..85 degC
    wma_t1[0] = feat_t'(50 << 8); wma_t2[0] = feat_t'(90 << 8);
    wma_t1[1] = feat_t'(60 << 8); wma_t2[1] = feat_t'(85 << 8);
    wma_t1[2] = feat_t'(60 << 8); wma_t2[2] = feat_t'(85 << 8);
    base_t = 60 << 8; base_c = 30 << 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(sigma_n == 3'd5, "default sigma_n is 5");
    check(port_open == 6'b111111, "all ports open after reset");

    while (accepted < NUM_SAMPLES) begin
      // switch sigma_5 -> sigma_7 halfway, while the pipeline is idle
      if (accepted == NUM_SAMPLES / 2 && m_n == 5) begin
        repeat (6) @(negedge clk);
        sigma_we = 1; sigma_n_cfg = 3'd7;
        @(negedge clk);
        sigma_we = 0;
        m_n = 7;
        check(sigma_n == 3'd7, "sigma switched to 7");
        n_sigma_switch++;
      end
      // next sample value
      if (attack_left == 0 && ($urandom % 40) == 0) begin
        attack_left = 40;
        attack_amp  = 2 + $urandom % 8;      // degC
        attack_b2   = $urandom % 2;
        n_attack[attack_b2]++;
      end
      if (burst_left == 0 && ($urandom % 60) == 0) burst_left = 3 + $urandom % 5;
      t = base_t + ($urandom % 80) - 40;      // +-0.16 degC sensor noise
      // behaviour 1: decrease then increase; behaviour 2: increase then decrease
      if (attack_left > 20)      t = attack_b2 ? t + (attack_amp << 8) : t - (attack_amp << 8);
      else if (attack_left > 0)  t = attack_b2 ? t - (attack_amp << 8) : t + (attack_amp << 8);
      c = base_c + ($urandom % 64) - 32;
      if (burst_left > 0) c = c + ((10 + $urandom % 50) << 8);
      if (attack_left > 0) attack_left--;
      if (burst_left > 0) burst_left--;
      // offer it, waiting for ready
      sample_valid = 1; congestion = feat_t'(c); temperature = feat_t'(t);
      #1;
      check(sample_ready, "detector idle and ready for the next sample");
      prev_state = anomaly_state;
      @(negedge clk);
      sample_valid = 0;
      model_sample(c, t);
      accepted++;
      // cycle 1: log holds, cycle 2: means, cycle 3: thresholds and level
      check(features[0] == feat_t'(e_feat[0]) && features[1] == feat_t'(e_feat[1]) &&
            features[2] == feat_t'(e_feat[2]), $sformatf("logged features, sample %0d", accepted));
      @(negedge clk);
      for (int f = 0; f < NUM_FEAT; f++)
        check(means[f] == feat_t'(m_wma[f]), $sformatf("mean of feature %0d: %0d vs %0d", f, means[f], m_wma[f]));
      @(negedge clk);
      check(eval_valid, "eval_valid three cycles after the sample");
      for (int f = 0; f < NUM_FEAT; f++) begin
        check(thresholds[f].upper == feat_t'(e_up[f]) && thresholds[f].lower == feat_t'(e_lo[f]),
              $sformatf("thresholds of feature %0d", f));
        if (feat_status[f] == FS_UPPER) n_upper++;
        if (feat_status[f] == FS_LOWER) n_lower++;
      end
      check(int'(anomaly_level_now) == e_level, $sformatf("level %0d expected %0d", anomaly_level_now, e_level));
      // random sample gap: the next sample may arrive right now (back-pressure
      // is then exercised on the next pass) or later
      @(negedge clk);
      check(int'(anomaly_state) == e_level, "anomaly state");
      lvl_seen[e_level]++;
      check($countones(port_open) == open_ports(prev_state), "mask changed before its time");
      @(negedge clk);
      // five cycles after acceptance the mask reflects the level
      check($countones(port_open) == open_ports(anomaly_level_e'(e_level)),
            $sformatf("open ports %b at level %0d", port_open, e_level));
      if (e_level == 1 && prev_state != LVL_1 && !l1_mask_seen[port_open]) begin
        l1_mask_seen[port_open] = 1;
        n_lvl1_masks++;
      end
      repeat ($urandom % 3) @(negedge clk);
    end

    // Back-pressure phase: hold one sample valid for 30 cycles. The detector
    // takes one sample every three cycles and holds ready low in between.
    begin
      int acc = 0;
      sample_valid = 1; congestion = feat_t'(base_c); temperature = feat_t'(base_t);
      for (int k = 0; k < 30; k++) begin
        #1;
        if (sample_ready) begin acc++; model_sample(base_c, base_t); end
        else n_backpressure++;
        @(negedge clk);
      end
      sample_valid = 0;
      check(acc == 10, $sformatf("%0d samples taken in 30 cycles, expected 10", acc));
      repeat (4) @(negedge clk);
      for (int f = 0; f < NUM_FEAT; f++)
        check(means[f] == feat_t'(m_wma[f]), "mean after back-pressure phase");
    end
    repeat (4) @(negedge clk);
    for (int p = 0; p < NUM_PORTS; p++)
      check(drop_count[p] == offered_shut[p], $sformatf("drop count port %0d: %0d vs %0d", p, drop_count[p], offered_shut[p]));

    begin
      int total_drops = 0;
      for (int p = 0; p < NUM_PORTS; p++) total_drops += drop_count[p];
      $display("mechanisms: normal=%0d level1=%0d level2=%0d level3=%0d upper=%0d lower=%0d weight3=%0d backpressure=%0d sigma_switch=%0d drops=%0d level1_masks=%0d attacks_b1=%0d attacks_b2=%0d",
               lvl_seen[0], lvl_seen[1], lvl_seen[2], lvl_seen[3], n_upper, n_lower, n_heavy,
               n_backpressure, n_sigma_switch, total_drops, n_lvl1_masks, n_attack[0], n_attack[1]);
      for (int l = 0; l < 4; l++) check(lvl_seen[l] > 0, $sformatf("level %0d never reached", l));
      check(n_attack[0] > 0 && n_attack[1] > 0, "an attack behaviour was never applied");
      check(n_upper > 0, "no Upper classification");
      check(n_lower > 0, "no Lower classification");
      check(n_heavy > 0, "weight-3 averaging never used");
      check(n_backpressure > 0, "sample back-pressure never happened");
      check(n_sigma_switch > 0, "sigma switch never happened");
      check(total_drops > 0, "no flit dropped");
      check(n_lvl1_masks > 1, "Level-1 port choice never varied");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
