// lstm_param_mem -- parameter store of one LSTM layer.
//
// Holds the input weights W, recurrent weights R and biases b of the four
// gates of all HIDDEN units of a layer: DEPTH = 4 * HIDDEN * (N_IN + HIDDEN + 1)
// words (2880 for 15 inputs and 20 hidden units). The reference model calls
// this a parameters ROM and its forward pass begins by restoring the trained
// parameters from memory; here it is a register array that is written once,
// word by word, through a simple write port (we/waddr/wdata) after reset, and
// is then only read while the equalizer runs.
//
// Every word is needed in every time step, so the array is exposed whole on
// q rather than through a read port; that is why it is built from registers
// and not from an SRAM macro. Word layout (this design's choice):
//   addr = (gate * HIDDEN + unit) * (N_IN + HIDDEN + 1) + k
//   k = 0 .. N_IN-1           input weight w[gate][unit][k]
//   k = N_IN .. N_IN+HIDDEN-1 recurrent weight r[gate][unit][k-N_IN]
//   k = N_IN+HIDDEN           bias b[gate][unit]
// with gate order i, f, g, o (lstme_pkg::gate_e). Reset clears all words.
// Timing: a write is visible on q the cycle after the write edge.
module lstm_param_mem
  import lstme_pkg::*;
#(
  parameter int N_IN   = 15,
  parameter int HIDDEN = 20,
  parameter int DEPTH  = N_GATES * HIDDEN * (N_IN + HIDDEN + 1),
  parameter int AW     = POFF_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fx_t           wdata,
  output fx_t           q [DEPTH]
);

  initial begin
    assert (DEPTH <= (1 << AW))
      else $fatal(1, "lstm_param_mem: DEPTH %0d does not fit %0d address bits", DEPTH, AW);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) q[k] <= '0;
    end else if (we && (int'(waddr) < DEPTH)) begin
      q[waddr] <= wdata;
    end
  end

endmodule
