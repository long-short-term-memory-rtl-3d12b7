// tb_fir_filter -- checks the post-processing FIR filter (5 taps).
// After reset the filter must pass its input through (b = 1,0,0,0,0). Then
// random coefficients are loaded and a random sample stream with gaps is
// filtered; y must equal sum b[k]*x[n-k] of the valid samples within
// 5 LSB one cycle after each valid sample, and hold on idle cycles.
module tb_fir_filter;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;
  localparam int T = 5;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0, in_valid = 1'b0;
  logic [POFF_W-1:0] waddr = '0;
  fx_t wdata = '0, x = '0, y;
  logic out_valid;
  real b [T];
  real xs [$];
  real y_ref = 0.0;
  int checks = 0, failures = 0;

  fir_filter #(.TAPS(T)) dut (.*);

  always #5 clk = ~clk;

  function automatic fx_t rnd_fx(input real mag);
    return to_fx((real'($urandom_range(0, 20000)) / 10000.0 - 1.0) * mag);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream(input int n_samples);
    for (int n = 0; n < n_samples; n++) begin
      logic v;
      v = ($urandom_range(0, 3) != 0);
      in_valid <= v;
      x <= rnd_fx(1.0);
      @(posedge clk);
      if (v) begin
        xs.push_front(to_real(x));
        void'(xs.pop_back());
        y_ref = 0.0;
        for (int k = 0; k < T; k++) y_ref += b[k] * xs[k];
        y_ref = sat(y_ref);
      end
      #1;
      checks += 2;
      if (out_valid !== v) failures++;
      if (absr(to_real(y) - y_ref) > 5.0 / 4096.0) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d y=%f ref=%f", n, to_real(y), y_ref);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < T; k++) begin xs.push_back(0.0); b[k] = (k == 0) ? 1.0 : 0.0; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    stream(50);
    in_valid <= 1'b0;
    for (int k = 0; k < T; k++) begin
      fx_t v;
      v = rnd_fx(1.5);
      b[k] = to_real(v);
      we <= 1'b1; waddr <= POFF_W'(k); wdata <= v;
      @(posedge clk);
    end
    we <= 1'b0;
    stream(500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
