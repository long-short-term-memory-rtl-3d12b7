// lstm_layer -- one LSTM layer of the equalizer with its state and parameters.
//
// HIDDEN lstm_neuron units evaluate one time step in parallel from the layer
// input x (N_IN words) and the layer's own previous hidden vector h. The new
// cell state c and hidden state h are captured in registers -- the "cell
// state" and "hidden state" unit delays that feed back into the layer -- on
// every clock edge at which in_valid is high, so the layer advances exactly
// one time step per valid input (one step per clock at full rate).
// state_clear (or reset) zeroes h and c, which is how the forward pass starts.
// The layer's weights live in its own lstm_param_mem, written through the
// we/waddr/wdata port.
//
// Timing: h_out and c_out are registered; out_valid follows in_valid by one
// cycle. What follows the equalizer's description: the gates, the feedback of
// h and c, one step per clock, 20 hidden units on 15 inputs by default. What
// is this design's own: the fully parallel datapath and the control signals.
module lstm_layer
  import lstme_pkg::*;
#(
  parameter int N_IN   = 15,
  parameter int HIDDEN = 20,
  localparam int K     = N_IN + HIDDEN + 1,
  localparam int DEPTH = N_GATES * HIDDEN * K
) (
  input  logic              clk,
  input  logic              rst_n,
  // parameter load
  input  logic              we,
  input  logic [POFF_W-1:0] waddr,
  input  fx_t               wdata,
  // data path
  input  logic              state_clear,
  input  logic              in_valid,
  input  fx_t               x     [N_IN],
  output fx_t               h_out [HIDDEN],
  output fx_t               c_out [HIDDEN],
  output logic              out_valid
);

  fx_t pmem [DEPTH];
  fx_t h_next [HIDDEN];
  fx_t c_next [HIDDEN];

  lstm_param_mem #(.N_IN(N_IN), .HIDDEN(HIDDEN)) u_pmem (
    .clk, .rst_n, .we, .waddr, .wdata, .q(pmem)
  );

  for (genvar u = 0; u < HIDDEN; u++) begin : g_unit
    fx_t params [N_GATES][K];
    always_comb
      for (int q = 0; q < N_GATES; q++)
        for (int k = 0; k < K; k++)
          params[q][k] = pmem[(q * HIDDEN + u) * K + k];

    lstm_neuron #(.N_IN(N_IN), .HIDDEN(HIDDEN)) u_neuron (
      .x, .h_prev(h_out), .c_prev(c_out[u]), .params,
      .c_next(c_next[u]), .h_next(h_next[u])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n || state_clear) begin
      for (int u = 0; u < HIDDEN; u++) begin
        h_out[u] <= '0;
        c_out[u] <= '0;
      end
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        h_out <= h_next;
        c_out <= c_next;
      end
    end
  end

endmodule
