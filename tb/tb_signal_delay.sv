// tb_signal_delay -- self-checking test of the SIPO input window.
// Streams random samples with random gaps and checks, after every valid
// sample, that taps[k] equals the sample entered k samples earlier, that
// taps_valid follows sample_valid by one cycle and that gaps hold the window.
module tb_signal_delay;
  import lstme_pkg::*;
  localparam int N = 15;
  logic clk = 1'b0, rst_n = 1'b0, sample_valid = 1'b0;
  fx_t  sample_in = '0;
  fx_t  taps [N];
  logic taps_valid;
  int   checks = 0, failures = 0;
  fx_t  hist [$];

  signal_delay #(.N_DELAY(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) hist.push_front('0);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      sample_valid <= ($urandom_range(0, 3) != 0);
      sample_in    <= fx_t'($urandom());
      @(posedge clk);
      if (sample_valid) begin
        hist.push_front(sample_in);
        void'(hist.pop_back());
      end
      #1;
      checks++;
      if (taps_valid !== sample_valid) begin
        failures++;
        $display("FAIL taps_valid=%0b expected %0b at n=%0d", taps_valid, sample_valid, n);
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (taps[k] !== hist[k]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d tap %0d = %0d expected %0d", n, k, taps[k], hist[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
