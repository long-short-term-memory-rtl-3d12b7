// rng_lfsr -- random number generator of the dropout layer.
//
// The dropout circuit compares a random number with the drop ratio for each
// feature channel; the kind of generator is not prescribed. This one holds
// N_OUT independent 16-bit maximal-length Fibonacci LFSRs (polynomial
// x^16 + x^14 + x^13 + x^11 + 1, period 65535), one per channel, each
// started from its own non-zero seed so that channels draw different
// numbers. All LFSRs step once on each clock edge at which advance is high.
//
// Seeds (this design's choice): seed(k) = (SEED + k * 16'h9E37) mod 2^16,
// replaced by 1 if that is zero. Reset reloads the seeds.
// Timing: rnd is registered; a step is visible the cycle after advance.
module rng_lfsr #(
  parameter int          N_OUT = 20,
  parameter logic [15:0] SEED  = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  output logic [15:0] rnd [N_OUT]
);

  function automatic logic [15:0] seed_of(input int k);
    logic [15:0] s;
    s = SEED + 16'(k * 32'h9E37);
    return (s == 16'h0) ? 16'h1 : s;
  endfunction

  function automatic logic [15:0] step(input logic [15:0] r);
    return {r[14:0], r[15] ^ r[13] ^ r[12] ^ r[10]};
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_OUT; k++) rnd[k] <= seed_of(k);
    end else if (advance) begin
      for (int k = 0; k < N_OUT; k++) rnd[k] <= step(rnd[k]);
    end
  end

endmodule
