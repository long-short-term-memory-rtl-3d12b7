// tb_fc_neuron -- checks the fully connected output neuron (20 inputs).
// Loads random weights and bias, applies random hidden vectors with random
// valid gaps and checks that y = sigmoid(w.h + b) of the reference model
// within 0.005 one cycle after each valid input, that out_valid follows
// in_valid by one cycle and that y holds on idle cycles.
module tb_fc_neuron;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;
  localparam int NH = 20;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0, in_valid = 1'b0;
  logic [POFF_W-1:0] waddr = '0;
  fx_t wdata = '0;
  fx_t h [NH];
  fx_t y;
  logic out_valid;
  real wr [], hr [];
  real y_ref = 0.0;
  int checks = 0, failures = 0;

  fc_neuron #(.HIDDEN(NH)) dut (.*);

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

  initial begin
    wr = new[NH+1]; hr = new[NH];
    for (int j = 0; j < NH; j++) h[j] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    checks++;
    if (y !== '0 || out_valid !== 1'b0) failures++;
    for (int j = 0; j <= NH; j++) begin
      fx_t v;
      v = rnd_fx(1.0);
      wr[j] = to_real(v);
      we <= 1'b1; waddr <= POFF_W'(j); wdata <= v;
      @(posedge clk);
    end
    we <= 1'b0;
    for (int n = 0; n < 500; n++) begin
      logic v;
      v = ($urandom_range(0, 3) != 0);
      in_valid <= v;
      for (int j = 0; j < NH; j++) h[j] <= rnd_fx(1.0);
      @(posedge clk);
      if (v) begin
        for (int j = 0; j < NH; j++) hr[j] = to_real(h[j]);
        y_ref = fc(wr, hr);
      end
      #1;
      checks += 2;
      if (out_valid !== v) failures++;
      if (absr(to_real(y) - y_ref) > 0.005) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d y=%f ref=%f", n, to_real(y), y_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
