// tanh_pwl -- hyperbolic tangent on Q3.12 numbers.
//
// Used for the LSTM cell candidate and for the cell state ahead of the output
// gate. Built from the identity tanh(x) = 2*sigmoid(2x) - 1 on top of
// sigmoid_pwl, so it shares that unit's piecewise-linear approximation
// (maximum error about 0.04). The doubling of x saturates. The identity-based
// construction is this design's choice. Combinational; output in [-1, 1].
module tanh_pwl
  import lstme_pkg::*;
(
  input  fx_t x,
  output fx_t y
);

  fx_t x2, s;

  always_comb begin
    if (x > (FX_MAX >>> 1))      x2 = FX_MAX;
    else if (x < (FX_MIN >>> 1)) x2 = FX_MIN;
    else                         x2 = x <<< 1;
  end

  sigmoid_pwl u_sig (.x(x2), .y(s));

  assign y = (s <<< 1) - FX_ONE;

endmodule
