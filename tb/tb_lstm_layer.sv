// tb_lstm_layer -- checks a full-size LSTM layer (15 inputs, 20 hidden units)
// over a random input sequence. Weights are loaded through the write port;
// the testbench keeps its own real-valued h and c vectors and advances them
// with lstme_ref_pkg::lstm_unit whenever in_valid is high. After every
// clock it checks out_valid (one-cycle latency), and that h_out and c_out
// match the reference within 0.02; idle cycles must hold the state, and a
// state_clear in mid-sequence must zero it.
module tb_lstm_layer;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;
  localparam int NI = 15, NH = 20, K = NI + NH + 1;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0, state_clear = 1'b0, in_valid = 1'b0;
  logic [POFF_W-1:0] waddr = '0;
  fx_t  wdata = '0;
  fx_t  x [NI];
  fx_t  h_out [NH];
  fx_t  c_out [NH];
  logic out_valid;
  real  w_unit [NH][];
  real  xr [], hr [], cr [], hn [], cn [];
  int   checks = 0, failures = 0, steps = 0;

  lstm_layer #(.N_IN(NI), .HIDDEN(NH)) dut (.*);

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

  task automatic compare(input string tag);
    for (int u = 0; u < NH; u++) begin
      checks += 2;
      if (absr(to_real(h_out[u]) - hr[u]) > 0.02 || absr(to_real(c_out[u]) - cr[u]) > 0.02) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s step %0d unit %0d h=%f (ref %f) c=%f (ref %f)", tag, steps, u,
                   to_real(h_out[u]), hr[u], to_real(c_out[u]), cr[u]);
      end
    end
  endtask

  initial begin
    xr = new[NI]; hr = new[NH]; cr = new[NH]; hn = new[NH]; cn = new[NH];
    for (int u = 0; u < NH; u++) begin w_unit[u] = new[N_GATES*K]; hr[u] = 0.0; cr[u] = 0.0; end
    for (int k = 0; k < NI; k++) x[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    // load the parameters: addr = (gate*NH + unit)*K + k
    for (int q = 0; q < N_GATES; q++)
      for (int u = 0; u < NH; u++)
        for (int k = 0; k < K; k++) begin
          fx_t v;
          v = rnd_fx((k == K-1) ? 0.5 : 0.4);
          w_unit[u][q*K + k] = to_real(v);
          @(posedge clk);
          we <= 1'b1; waddr <= POFF_W'((q*NH + u)*K + k); wdata <= v;
        end
    @(posedge clk);
    we <= 1'b0;
    state_clear <= 1'b1;
    @(posedge clk);
    state_clear <= 1'b0;
    for (int n = 0; n < 300; n++) begin
      logic v;
      v = ($urandom_range(0, 4) != 0);
      in_valid <= v;
      for (int k = 0; k < NI; k++) begin
        x[k]  <= rnd_fx(1.0);
      end
      if (n == 150) state_clear <= 1'b1;
      @(posedge clk);
      state_clear <= 1'b0;
      if (n == 150) begin
        for (int u = 0; u < NH; u++) begin hr[u] = 0.0; cr[u] = 0.0; end
        v = 1'b0;
      end else if (v) begin
        for (int k = 0; k < NI; k++) xr[k] = to_real(x[k]);
        for (int u = 0; u < NH; u++) lstm_unit(w_unit[u], xr, hr, cr[u], cn[u], hn[u]);
        for (int u = 0; u < NH; u++) begin hr[u] = hn[u]; cr[u] = cn[u]; end
        steps++;
      end
      #1;
      checks++;
      if (out_valid !== v) begin
        failures++;
        $display("FAIL out_valid=%0b expected %0b", out_valid, v);
      end
      compare(v ? "step" : "hold");
    end
    $display("layer steps simulated: %0d", steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
