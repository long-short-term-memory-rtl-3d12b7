// signal_delay -- serial-in, parallel-out sample buffer (the equalizer's
// "signal delay" / input buffer).
//
// The sampled channel output enters one word per sample_valid and shifts
// through N_DELAY registers. taps[0] holds the newest sample r_t and
// taps[N_DELAY-1] the oldest, r_(t-N_DELAY+1); all taps are presented in
// parallel as the input vector of the first LSTM layer. That ordering and the
// default depth of 15 delays follow the equalizer's description; the Q3.12
// sample format and the synchronous clear are this design's choices.
//
// Timing: the taps change on the clock edge at which sample_valid is high;
// taps_valid is high for the following cycle (latency 1, one sample per
// cycle at most).
module signal_delay
  import lstme_pkg::*;
#(
  parameter int N_DELAY = 15
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sample_valid,
  input  fx_t  sample_in,
  output fx_t  taps [N_DELAY],
  output logic taps_valid
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_DELAY; k++) taps[k] <= '0;
      taps_valid <= 1'b0;
    end else begin
      taps_valid <= sample_valid;
      if (sample_valid) begin
        taps[0] <= sample_in;
        for (int k = 1; k < N_DELAY; k++) taps[k] <= taps[k-1];
      end
    end
  end

endmodule
