// lstme_ref_pkg -- real-valued reference model used by the testbenches.
//
// Re-states the equalizer's arithmetic with real numbers so that the
// testbenches can compare the fixed-point hardware against values computed
// independently of it: the four-segment sigmoid approximation written as a
// formula, tanh(x) = 2*sigmoid(2x) - 1, one LSTM time step, the fully
// connected neuron and an FIR filter, plus conversion between real numbers
// and the Q3.12 words of the design. The exact sigmoid/tanh are also given
// for checking the approximation error itself.
package lstme_ref_pkg;

  localparam real SCALE = 4096.0;

  function automatic real to_real(input logic signed [15:0] v);
    return real'(v) / SCALE;
  endfunction

  function automatic logic signed [15:0] to_fx(input real r);
    real s;
    s = r * SCALE;
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return 16'($rtoi(s));
  endfunction

  function automatic real sat(input real r);
    if (r > 32767.0 / SCALE) return 32767.0 / SCALE;
    if (r < -8.0) return -8.0;
    return r;
  endfunction

  function automatic real absr(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  function automatic real sigmoid_exact(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real tanh_exact(input real x);
    return ($exp(2.0 * x) - 1.0) / ($exp(2.0 * x) + 1.0);
  endfunction

  // piecewise-linear approximation, written from its segment table
  function automatic real sigmoid_plan(input real x);
    real a, y;
    a = absr(x);
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction

  function automatic real tanh_plan(input real x);
    return 2.0 * sigmoid_plan(sat(2.0 * x)) - 1.0;
  endfunction

  // One LSTM unit step. w: [gate*(nin+nh+1) + k], gate order i,f,g,o;
  // per gate: nin input weights, nh recurrent weights, bias.
  function automatic void lstm_unit(input real w[], input real x[], input real h[],
                                    input real c_prev, output real c_next, output real h_next);
    real z [4];
    int  nin, nh, kk;
    real ig, fg, gg, og;
    nin = x.size();
    nh  = h.size();
    kk  = nin + nh + 1;
    for (int q = 0; q < 4; q++) begin
      z[q] = w[q*kk + kk - 1];
      for (int k = 0; k < nin; k++) z[q] += w[q*kk + k] * x[k];
      for (int j = 0; j < nh; j++)  z[q] += w[q*kk + nin + j] * h[j];
      z[q] = sat(z[q]);
    end
    ig = sigmoid_plan(z[0]);
    fg = sigmoid_plan(z[1]);
    gg = tanh_plan(z[2]);
    og = sigmoid_plan(z[3]);
    c_next = sat(fg * c_prev + ig * gg);
    h_next = og * tanh_plan(c_next);
  endfunction

  // fully connected neuron: w[0..n-1], bias w[n]
  function automatic real fc(input real w[], input real h[]);
    real z;
    z = w[h.size()];
    for (int j = 0; j < h.size(); j++) z += w[j] * h[j];
    return sigmoid_plan(sat(z));
  endfunction

endpackage
