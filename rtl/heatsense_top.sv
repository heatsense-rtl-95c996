// heatsense_top: thermal anomaly detection and action mechanism of one router.
//
// The block sits beside the pipeline of a NoC router and defends it against a
// hardware Trojan that falsifies the router's temperature sensor. It watches
// three features (F15 congestion, F16 temperature, F17 2-sample temperature
// average), keeps an online weighted moving average of each, derives for each
// an upper and lower threshold Mean +/- Mean/2^n using shifts only, counts how
// many features fall outside their band and, with that count as the anomaly
// level, shuts 0, 4, 5 or all 6 of the router's input ports.
//
// Data path (one evaluation per accepted sample):
//   cycle 0  sample_valid && sample_ready: congestion and temperature taken
//   cycle 1  features_log holds F15/F16/F17       -> wma_calc x3
//   cycle 2  WMA updated; thresholds_determination -> threshold_registers
//   cycle 3  thresholds held; anomaly_determination -> anomaly_level_register
//            (eval_valid pulses, anomaly_level_now shows the fresh count)
//   cycle 4  anomaly_state updated; on a change the shutdown is re-decided
//   cycle 5  port_open updated, input_port_gate applies it
// sample_ready is low in cycles 1 and 2, so a new sample can never overwrite
// the log while its own evaluation still reads it: at most one sample every
// three cycles is taken.
//
// The blocks, their order and the level-to-shutdown mapping follow the router
// architecture and state diagram of the design. The pipeline timing, the
// ready handshake, the fixed-point format and the configuration ports
// (sigma_we/sigma_n_cfg for n, wma_t1/wma_t2 for the weight band of each
// feature) are this design's choices. The temperature sensor, the congestion
// measure and the router's own buffers, allocators and crossbar are outside
// this block: their signals are ports.
module heatsense_top
  import heatsense_pkg::*;
#(
  parameter int unsigned FLIT_W = 32,
  parameter int unsigned CNT_W  = 32,
  parameter logic [15:0] SEED   = 16'hACE1
)(
  input  logic                              clk,
  input  logic                              rst_n,
  // feature samples (Q8.8): router congestion in %, router temperature in degC
  input  logic                              sample_valid,
  output logic                              sample_ready,
  input  feat_t                             congestion,
  input  feat_t                             temperature,
  // configuration
  input  logic                              sigma_we,
  input  sigma_n_t                          sigma_n_cfg,
  input  feat_vec_t                         wma_t1,
  input  feat_vec_t                         wma_t2,
  // incoming links of the router and the input buffers behind them
  input  logic [NUM_PORTS-1:0]              in_valid,
  input  logic [NUM_PORTS-1:0][FLIT_W-1:0]  in_flit,
  output logic [NUM_PORTS-1:0]              in_ready,
  output logic [NUM_PORTS-1:0]              buf_valid,
  output logic [NUM_PORTS-1:0][FLIT_W-1:0]  buf_flit,
  input  logic [NUM_PORTS-1:0]              buf_ready,
  // status
  output feat_vec_t                         features,
  output feat_vec_t                         means,
  output sigma_n_t                          sigma_n,
  output thresh_vec_t                       thresholds,
  output feat_status_vec_t                  feat_status,
  output logic                              eval_valid,
  output anomaly_level_e                    anomaly_level_now,
  output anomaly_level_e                    anomaly_state,
  output port_mask_t                        port_open,
  output logic [NUM_PORTS-1:0][CNT_W-1:0]   drop_count
);

  logic        log_valid;
  logic [NUM_FEAT-1:0] wma_valid;
  logic        wma_done;
  thresh_vec_t thr_next;
  logic        thr_valid;
  logic        level_changed;

  assign wma_done     = &wma_valid;
  assign sample_ready = !(log_valid || wma_done);

  features_log u_log (
    .clk, .rst_n,
    .sample_valid, .sample_ready,
    .congestion, .temperature,
    .features, .log_valid
  );

  for (genvar f = 0; f < NUM_FEAT; f++) begin : g_wma
    wma_calc u_wma (
      .clk, .rst_n,
      .in_valid (log_valid),
      .x        (features[f]),
      .t1       (wma_t1[f]),
      .t2       (wma_t2[f]),
      .wma      (means[f]),
      .out_valid(wma_valid[f])
    );
  end

  sigma_tuning u_sigma (
    .clk, .rst_n,
    .cfg_we (sigma_we),
    .cfg_n  (sigma_n_cfg),
    .n      (sigma_n)
  );

  thresholds_determination u_thr_det (
    .mean       (means),
    .n          (sigma_n),
    .thresholds (thr_next)
  );

  threshold_registers u_thr_reg (
    .clk, .rst_n,
    .load       (wma_done),
    .thr_in     (thr_next),
    .thresholds (thresholds),
    .valid      (thr_valid),
    .loaded     (eval_valid)
  );

  anomaly_determination u_det (
    .features   (features),
    .thresholds (thresholds),
    .status     (feat_status),
    .level      (anomaly_level_now)
  );

  anomaly_level_register u_lvl (
    .clk, .rst_n,
    .load     (eval_valid && thr_valid),
    .level_in (anomaly_level_now),
    .state    (anomaly_state),
    .changed  (level_changed)
  );

  port_shutdown_decision #(.SEED(SEED)) u_psd (
    .clk, .rst_n,
    .update    (level_changed),
    .level     (anomaly_state),
    .port_open (port_open)
  );

  input_port_gate #(.FLIT_W(FLIT_W), .CNT_W(CNT_W)) u_gate (
    .clk, .rst_n,
    .port_open,
    .in_valid, .in_flit, .in_ready,
    .buf_valid, .buf_flit, .buf_ready,
    .drop_count
  );

  // The log must not change while an evaluation reads it.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (log_valid || wma_done) |-> !sample_ready);

endmodule
