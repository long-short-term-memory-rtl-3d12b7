// lstm_neuron -- one hidden unit of an LSTM layer, one time step.
//
// For each gate q in {i, f, g, o} it forms the pre-activation
//   z_q = sum_k w_q[k]*x[k] + sum_j r_q[j]*h_prev[j] + b_q
// at full precision in an ACCW-bit accumulator, then saturates it to Q3.12.
// Activations: i, f, o through sigmoid, g through tanh. The state update is
// the standard LSTM cell:
//   c = f*c_prev + i*g        h = o*tanh(c)
// as drawn in the LSTM cell diagram (tanh of the new cell state multiplied by
// the output gate). The equations, gates and data flow follow the equalizer's
// description; the fixed-point widths, truncation and saturation are this
// design's choice.
//
// Interface: params[q][k] holds, for gate q, the N_IN input weights, then the
// HIDDEN recurrent weights, then the bias (the layout of lstm_param_mem).
// Purely combinational: the layer registers c and h.
module lstm_neuron
  import lstme_pkg::*;
#(
  parameter int N_IN   = 15,
  parameter int HIDDEN = 20,
  localparam int K     = N_IN + HIDDEN + 1
) (
  input  fx_t x      [N_IN],
  input  fx_t h_prev [HIDDEN],
  input  fx_t c_prev,
  input  fx_t params [N_GATES][K],
  output fx_t c_next,
  output fx_t h_next
);

  fx_t z [N_GATES];      // saturated pre-activations
  fx_t a [N_GATES];      // activations
  fx_t tanh_c;

  always_comb begin
    for (int q = 0; q < N_GATES; q++) begin
      fx_acc_t acc;
      acc = fx_acc_t'(params[q][K-1]) <<< FW;   // bias, moved to product scale
      for (int k = 0; k < N_IN; k++)
        acc = acc + fx_acc_t'(fx_mul_full(params[q][k], x[k]));
      for (int j = 0; j < HIDDEN; j++)
        acc = acc + fx_acc_t'(fx_mul_full(params[q][N_IN+j], h_prev[j]));
      z[q] = sat_acc(acc >>> FW);
    end
  end

  sigmoid_pwl u_sig_i (.x(z[GATE_I]), .y(a[GATE_I]));
  sigmoid_pwl u_sig_f (.x(z[GATE_F]), .y(a[GATE_F]));
  tanh_pwl    u_tanh_g(.x(z[GATE_G]), .y(a[GATE_G]));
  sigmoid_pwl u_sig_o (.x(z[GATE_O]), .y(a[GATE_O]));

  always_comb begin
    fx_acc_t cs;
    cs = fx_acc_t'(fx_mul_full(a[GATE_F], c_prev))
       + fx_acc_t'(fx_mul_full(a[GATE_I], a[GATE_G]));
    c_next = sat_acc(cs >>> FW);
  end

  tanh_pwl u_tanh_c (.x(c_next), .y(tanh_c));

  assign h_next = fx_mul(a[GATE_O], tanh_c);

endmodule
