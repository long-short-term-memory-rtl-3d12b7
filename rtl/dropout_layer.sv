// dropout_layer -- random gating of the feature channels between layers.
//
// For every one of CH feature channels a comparator tests that channel's
// random number against the common drop ratio; the result enables the
// channel, and the channel's word is ANDed with that enable (a dropped
// channel passes 0). This is the RNG / comparator / AND structure of the
// equalizer's dropout circuit, repeated per channel. Choices of this design:
//   - keep a channel when rnd >= drop_ratio, so the drop probability is
//     drop_ratio / 65536;
//   - drop_en = 0 disables dropout (every channel kept), which is how the
//     trained equalizer runs; drop_en = 1 applies it;
//   - kept words are not rescaled by 1/(1-p).
// The random numbers step (advance) once per layer time step.
//
// Timing: feat_out and keep are combinational in feat_in, drop_en and
// drop_ratio, and use the random numbers held in the RNG registers.
module dropout_layer
  import lstme_pkg::*;
#(
  parameter int          CH   = 20,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  input  logic        drop_en,
  input  logic [15:0] drop_ratio,
  input  fx_t         feat_in  [CH],
  output fx_t         feat_out [CH],
  output logic [CH-1:0] keep
);

  logic [15:0] rnd [CH];

  rng_lfsr #(.N_OUT(CH), .SEED(SEED)) u_rng (
    .clk, .rst_n, .advance, .rnd
  );

  always_comb begin
    for (int k = 0; k < CH; k++) begin
      keep[k]     = !drop_en || (rnd[k] >= drop_ratio);
      feat_out[k] = feat_in[k] & {DW{keep[k]}};
    end
  end

endmodule
