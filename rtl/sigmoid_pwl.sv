// sigmoid_pwl -- logistic sigmoid 1/(1+exp(-x)) on Q3.12 numbers.
//
// The equalizer needs sigmoid for its forget, input and output gates and for
// the fully connected output neuron, but does not say how it is built. This
// unit uses the four-segment piecewise-linear "PLAN" approximation, whose
// slopes are powers of two so that it costs only shifts, adds and
// comparators (maximum error about 0.019):
//   |x| >= 5        : 1
//   2.375 <= |x| < 5: |x|/32 + 0.84375
//   1 <= |x| < 2.375: |x|/8  + 0.625
//   0 <= |x| < 1    : |x|/4  + 0.5
//   x < 0           : 1 - y(|x|)
// Purely combinational; output is in [0, 1] in the same Q3.12 format.
module sigmoid_pwl
  import lstme_pkg::*;
(
  input  fx_t x,
  output fx_t y
);

  localparam fx_t T5    = fx_t'(5 * 4096);
  localparam fx_t T2375 = fx_t'(9728);   // 2.375
  localparam fx_t C1    = fx_t'(3456);   // 0.84375
  localparam fx_t C2    = fx_t'(2560);   // 0.625

  fx_t ax, yp;

  always_comb begin
    // |x|; the most negative code saturates to the largest positive one
    if (x == FX_MIN)      ax = FX_MAX;
    else if (x < 0)       ax = -x;
    else                  ax = x;

    if (ax >= T5)         yp = FX_ONE;
    else if (ax >= T2375) yp = (ax >>> 5) + C1;
    else if (ax >= FX_ONE) yp = (ax >>> 3) + C2;
    else                  yp = (ax >>> 2) + FX_HALF;

    y = (x < 0) ? FX_ONE - yp : yp;
  end

endmodule
