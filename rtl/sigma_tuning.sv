// sigma_tuning: holds the tolerance exponent n of sigma_n = Mean / 2^n.
//
// The detector replaces the standard deviation by sigma_n, a right shift of
// the mean by n bits, with n between 1 and 7. This block is the register that
// selects n. It resets to SIGMA_N_DEFAULT (5, the widest of the three settings
// sigma_5..sigma_7 that give useful detection) and takes a new value when
// cfg_we is high. A written value outside 1..7 is clamped to the nearest
// limit, so the shift always stays in the range the method defines.
//
// That n is set through a write port, and the clamping, are this design's
// choices; the description only says that this component determines n.
// Timing: a write is visible on n the cycle after cfg_we.
module sigma_tuning
  import heatsense_pkg::*;
#(
  parameter sigma_n_t RESET_N = sigma_n_t'(SIGMA_N_DEFAULT)
)(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cfg_we,
  input  sigma_n_t cfg_n,
  output sigma_n_t n
);

  sigma_n_t clamped;

  always_comb begin
    if (cfg_n < sigma_n_t'(SIGMA_N_MIN))      clamped = sigma_n_t'(SIGMA_N_MIN);
    else if (cfg_n > sigma_n_t'(SIGMA_N_MAX)) clamped = sigma_n_t'(SIGMA_N_MAX);
    else                                      clamped = cfg_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      n <= RESET_N;
    else if (cfg_we) n <= clamped;
  end

endmodule
