// heatsense_pkg: types and constants shared by the thermal anomaly detector.
//
// The detector watches three features of one NoC router: F15 (router
// congestion, 0..100 %), F16 (router temperature, 0..90 degC) and F17 (the
// average of the last two temperature samples). The three-feature set and the
// feature numbers follow the router figure of the design; the number
// representation is this design's own choice: every feature is an unsigned
// fixed-point value with FRAC_W fractional bits (Q8.8 by default), so that the
// narrowest tolerance Mean/2^7 of a 60 degC reading (about 0.47 degC) is still
// a non-zero number.
package heatsense_pkg;

  // Feature number format: unsigned, FEAT_W bits, FRAC_W of them fractional.
  localparam int unsigned FEAT_W = 16;
  localparam int unsigned FRAC_W = 8;

  // The monitored feature set (Thermal-Congestion set: F15, F16, F17).
  localparam int unsigned NUM_FEAT = 3;
  localparam int unsigned F15_CONGESTION = 0;
  localparam int unsigned F16_TEMP       = 1;
  localparam int unsigned F17_TEMP_AVG2  = 2;

  // Router ports that the action mechanism can shut down.
  localparam int unsigned NUM_PORTS = 6;

  // sigma_n = Mean >> n, with n limited to 1..7.
  localparam int unsigned SIGMA_N_MIN     = 1;
  localparam int unsigned SIGMA_N_MAX     = 7;
  localparam int unsigned SIGMA_N_DEFAULT = 5;
  localparam int unsigned SIGMA_N_W       = 3;

  typedef logic [FEAT_W-1:0]    feat_t;
  typedef feat_t [NUM_FEAT-1:0] feat_vec_t;
  typedef logic [SIGMA_N_W-1:0] sigma_n_t;
  typedef logic [NUM_PORTS-1:0] port_mask_t;

  // One feature's pair of approximate thresholds.
  typedef struct packed {
    feat_t upper;
    feat_t lower;
  } thresh_t;
  typedef thresh_t [NUM_FEAT-1:0] thresh_vec_t;

  // Status of one feature against its thresholds: Upper, Lower or Normal.
  typedef enum logic [1:0] {
    FS_NORMAL = 2'd0,
    FS_UPPER  = 2'd1,
    FS_LOWER  = 2'd2
  } feat_status_e;
  typedef feat_status_e [NUM_FEAT-1:0] feat_status_vec_t;

  // Anomaly level = number of features out of range.
  typedef enum logic [1:0] {
    LVL_NORMAL = 2'd0,
    LVL_1      = 2'd1,
    LVL_2      = 2'd2,
    LVL_3      = 2'd3
  } anomaly_level_e;

  // Ports left open at each level (6, 2, 1, 0 of 6).
  function automatic int unsigned open_ports(anomaly_level_e lvl);
    case (lvl)
      LVL_NORMAL: return NUM_PORTS;
      LVL_1:      return NUM_PORTS - 4;
      LVL_2:      return NUM_PORTS - 5;
      default:    return 0;
    endcase
  endfunction

endpackage
