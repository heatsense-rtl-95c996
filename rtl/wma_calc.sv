// wma_calc: online approximate weighted moving average of one feature.
//
// Each new observation x updates the running mean
//     WMA_new = (w1*x + w0*WMA_old) / (w1 + w0)
// where w1 is the weight of the observation and w0 the weight of the old mean.
// A value v gets weight 1 below the band limit t1 and weight 3 inside the band
// [t1, t2). Because the weights are 1 or 3, every divisor is 2, 4 or 6, and
// when both weights are equal the result is simply (x + WMA_old)/2, so the
// whole update needs only adds and right shifts:
//     w1 == w0      : (x + WMA_old) >> 1
//     w1=3, w0=1    : (3x + WMA_old) >> 2
//     w1=1, w0=3    : (x + 3*WMA_old) >> 2
// Results are truncated.
//
// The update formula and the 1/3 weights follow the design description. It
// does not say which value selects w0, what weight a value at or above t2
// gets, or how the mean starts. Here w0 is chosen by WMA_old itself, values at
// or above t2 get weight 1 again (an out-of-band reading is not trusted to move
// the mean quickly), and the first observation after reset loads the mean
// directly.
//
// Timing: in_valid with x updates wma at the next clock edge; out_valid pulses
// in that same following cycle.
module wma_calc
  import heatsense_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  feat_t x,
  input  feat_t t1,     // lower edge of the weight-3 band
  input  feat_t t2,     // upper edge (exclusive) of the weight-3 band
  output feat_t wma,
  output logic  out_valid
);

  logic            primed;
  logic            w1_is3, w0_is3;
  logic [FEAT_W+1:0] sum;
  feat_t           next_wma;

  function automatic logic heavy(feat_t v, feat_t lo, feat_t hi);
    return (v >= lo) && (v < hi);
  endfunction

  always_comb begin
    w1_is3 = heavy(x, t1, t2);
    w0_is3 = heavy(wma, t1, t2);
    if (w1_is3 == w0_is3) begin
      sum      = {2'b00, x} + {2'b00, wma};
      next_wma = feat_t'(sum >> 1);
    end else if (w1_is3) begin
      sum      = {1'b0, x, 1'b0} + {2'b00, x} + {2'b00, wma};
      next_wma = feat_t'(sum >> 2);
    end else begin
      sum      = {2'b00, x} + {1'b0, wma, 1'b0} + {2'b00, wma};
      next_wma = feat_t'(sum >> 2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wma       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        wma    <= primed ? next_wma : x;
        primed <= 1'b1;
      end
    end
  end

endmodule
