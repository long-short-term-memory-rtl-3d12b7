// lstme_top -- LSTM neuron equalizer for a serial link receiver.
//
// Data path, one received sample per valid cycle:
//   sample_in -> signal_delay (N_DELAY-word SIPO window r_t .. r_(t-N_DELAY+1))
//             -> LSTM layer 0 -> dropout 0 -> LSTM layer 1 -> dropout 1 -> ...
//             -> fc_neuron (sigmoid(w.h + b)) -> fir_filter -> eq_out
//             -> slicer (eq_bit = eq_out >= 0.5)
// Each LSTM layer keeps its own h and c state and advances one time step per
// valid input; each is followed by a dropout layer, which is transparent
// unless drop_en is set. The default configuration -- one layer of 20 hidden
// units on a 15-sample window -- is the size the equalizer uses for a 50 Gb/s
// PCB channel; LAYERS > 1 builds the deep (stacked) variant.
//
// Parameter load bus (this design's choice): a write of param_wdata to
// param_addr when param_we is high. param_addr[15:12] selects the target:
// 0 .. 13 LSTM layer (layout in lstm_param_mem), 14 the fully connected
// neuron (w[0..HIDDEN-1], then b), 15 the FIR filter (b[0..FIR_TAPS-1]).
// Load all parameters, pulse state_clear, then stream samples.
//
// Timing: out_valid follows sample_valid by LAYERS + 3 cycles (delay buffer,
// one per layer, fully connected neuron, FIR); throughput one sample per
// clock. All outputs are registered except eq_bit, which is a comparator on
// the registered eq_out. The analog sample-and-hold ahead of sample_in and
// the clock source are outside this module.
module lstme_top
  import lstme_pkg::*;
#(
  parameter int N_DELAY  = 15,
  parameter int HIDDEN   = 20,
  parameter int LAYERS   = 1,
  parameter int FIR_TAPS = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  // parameter load bus
  input  logic               param_we,
  input  logic [PADDR_W-1:0] param_addr,
  input  fx_t                param_wdata,
  // control
  input  logic               state_clear,
  input  logic               drop_en,
  input  logic [15:0]        drop_ratio,
  // sampled channel output
  input  logic               sample_valid,
  input  fx_t                sample_in,
  // equalized output
  output fx_t                eq_out,
  output logic               eq_bit,
  output logic               out_valid
);

  initial begin
    assert (LAYERS >= 1 && LAYERS <= 14)
      else $fatal(1, "lstme_top: LAYERS must be 1 .. 14");
  end

  logic [3:0]        region;
  logic [POFF_W-1:0] offset;
  assign region = param_addr[PADDR_W-1 -: 4];
  assign offset = param_addr[POFF_W-1:0];

  // ---- input window
  fx_t  window [N_DELAY];
  logic window_valid;

  signal_delay #(.N_DELAY(N_DELAY)) u_delay (
    .clk, .rst_n, .sample_valid, .sample_in,
    .taps(window), .taps_valid(window_valid)
  );

  // ---- LSTM stack
  fx_t  lay_h     [LAYERS][HIDDEN];   // hidden state of each layer
  fx_t  lay_c     [LAYERS][HIDDEN];   // cell state (internal feedback only)
  fx_t  lay_drop  [LAYERS][HIDDEN];   // after dropout
  logic lay_valid [LAYERS];

  for (genvar l = 0; l < LAYERS; l++) begin : g_layer
    logic          keep_unused;
    logic [HIDDEN-1:0] keep;
    if (l == 0) begin : g_first
      lstm_layer #(.N_IN(N_DELAY), .HIDDEN(HIDDEN)) u_lstm (
        .clk, .rst_n,
        .we(param_we && region == 4'(l)), .waddr(offset), .wdata(param_wdata),
        .state_clear, .in_valid(window_valid), .x(window),
        .h_out(lay_h[l]), .c_out(lay_c[l]), .out_valid(lay_valid[l])
      );
    end else begin : g_next
      lstm_layer #(.N_IN(HIDDEN), .HIDDEN(HIDDEN)) u_lstm (
        .clk, .rst_n,
        .we(param_we && region == 4'(l)), .waddr(offset), .wdata(param_wdata),
        .state_clear, .in_valid(lay_valid[l-1]), .x(lay_drop[l-1]),
        .h_out(lay_h[l]), .c_out(lay_c[l]), .out_valid(lay_valid[l])
      );
    end

    dropout_layer #(.CH(HIDDEN), .SEED(16'hACE1 + 16'(l * 16'h3571))) u_drop (
      .clk, .rst_n, .advance(lay_valid[l]), .drop_en, .drop_ratio,
      .feat_in(lay_h[l]), .feat_out(lay_drop[l]), .keep
    );
    assign keep_unused = ^keep;
  end

  // ---- output neuron and post filter
  fx_t  fc_y;
  logic fc_valid;

  fc_neuron #(.HIDDEN(HIDDEN)) u_fc (
    .clk, .rst_n,
    .we(param_we && region == REGION_FC), .waddr(offset), .wdata(param_wdata),
    .in_valid(lay_valid[LAYERS-1]), .h(lay_drop[LAYERS-1]),
    .y(fc_y), .out_valid(fc_valid)
  );

  fir_filter #(.TAPS(FIR_TAPS)) u_fir (
    .clk, .rst_n,
    .we(param_we && region == REGION_FIR), .waddr(offset), .wdata(param_wdata),
    .in_valid(fc_valid), .x(fc_y), .y(eq_out), .out_valid
  );

  assign eq_bit = (eq_out >= FX_HALF);

endmodule
