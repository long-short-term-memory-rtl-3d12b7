// fir_filter -- post-processing FIR filter on the equalized samples.
//
// The equalizer smooths the output of its fully connected neuron with an FIR
// filter (numerator-only transfer function) but leaves the order and the
// coefficients open. This is a direct-form filter of TAPS loadable
// coefficients:
//   y[n] = sum_{k=0}^{TAPS-1} b[k] * x[n-k]
// where x[n] is the sample presented with in_valid and x[n-k] are earlier
// valid samples. Coefficients b[k] are written at address k of the
// we/waddr/wdata port; reset sets b[0] = 1 and the rest to 0, so an unloaded
// filter passes its input through. Tap count, coefficient loading and reset
// values are this design's choices.
//
// Timing: y is registered; out_valid follows in_valid by one cycle.
module fir_filter
  import lstme_pkg::*;
#(
  parameter int TAPS = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [POFF_W-1:0] waddr,
  input  fx_t               wdata,
  input  logic              in_valid,
  input  fx_t               x,
  output fx_t               y,
  output logic              out_valid
);

  fx_t coef [TAPS];
  fx_t hist [TAPS];   // hist[0] = x[n-1], hist[k] = x[n-1-k]
  fx_t yn;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) coef[k] <= (k == 0) ? FX_ONE : '0;
    end else if (we) begin
      for (int k = 0; k < TAPS; k++)
        if (int'(waddr) == k) coef[k] <= wdata;
    end
  end

  always_comb begin
    fx_acc_t acc;
    acc = fx_acc_t'(fx_mul_full(coef[0], x));
    for (int k = 1; k < TAPS; k++)
      acc = acc + fx_acc_t'(fx_mul_full(coef[k], hist[k-1]));
    yn = sat_acc(acc >>> FW);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) hist[k] <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y       <= yn;
        hist[0] <= x;
        for (int k = 1; k < TAPS; k++) hist[k] <= hist[k-1];
      end
    end
  end

endmodule
