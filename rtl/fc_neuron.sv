// fc_neuron -- fully connected output neuron of the equalizer.
//
// Maps the hidden vector h of the last LSTM layer to one equalized sample:
//   y = sigmoid( sum_j w[j]*h[j] + b )
// as the equalizer's description defines it. The HIDDEN weights and the bias
// sit in a small register array written through we/waddr/wdata: words
// 0 .. HIDDEN-1 are w, word HIDDEN is b (layout, loading and reset to zero are
// this design's choices). The dot product is formed at full precision and
// saturated to Q3.12 before sigmoid_pwl.
//
// Timing: y is registered; out_valid follows in_valid by one cycle.
module fc_neuron
  import lstme_pkg::*;
#(
  parameter int HIDDEN = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [POFF_W-1:0] waddr,
  input  fx_t               wdata,
  input  logic              in_valid,
  input  fx_t               h [HIDDEN],
  output fx_t               y,
  output logic              out_valid
);

  fx_t wgt [HIDDEN+1];
  fx_t z, s;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j <= HIDDEN; j++) wgt[j] <= '0;
    end else if (we) begin
      for (int j = 0; j <= HIDDEN; j++)
        if (int'(waddr) == j) wgt[j] <= wdata;
    end
  end

  always_comb begin
    fx_acc_t acc;
    acc = fx_acc_t'(wgt[HIDDEN]) <<< FW;
    for (int j = 0; j < HIDDEN; j++)
      acc = acc + fx_acc_t'(fx_mul_full(wgt[j], h[j]));
    z = sat_acc(acc >>> FW);
  end

  sigmoid_pwl u_sig (.x(z), .y(s));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= s;
    end
  end

endmodule
