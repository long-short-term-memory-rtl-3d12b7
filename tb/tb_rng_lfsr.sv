// tb_rng_lfsr -- checks the dropout random number generator.
// Each channel's sequence is compared word by word with an LFSR model
// written here from its polynomial (x^16+x^14+x^13+x^11+1, shift left,
// feedback into bit 0); channel 0 must return to its seed after exactly
// 65535 steps and not before; channels must start from distinct seeds; and
// advance = 0 must hold the value.
module tb_rng_lfsr;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0, advance = 1'b0;
  logic [15:0] rnd [N];
  logic [15:0] model [N];
  logic [15:0] seed0;
  int checks = 0, failures = 0, period = 0;

  rng_lfsr #(.N_OUT(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    for (int k = 0; k < N; k++) begin
      model[k] = rnd[k];
      checks++;
      if (rnd[k] == 16'h0) failures++;
      for (int j = 0; j < k; j++) begin
        checks++;
        if (rnd[k] == rnd[j]) failures++;
      end
    end
    checks++;
    if (rnd[0] !== 16'hACE1) begin failures++; $display("FAIL seed0 %h", rnd[0]); end
    seed0 = rnd[0];
    advance <= 1'b1;
    for (int n = 1; n <= 65535; n++) begin
      @(posedge clk); #1;
      for (int k = 0; k < N; k++) begin
        model[k] = {model[k][14:0], ^(model[k] & 16'hB400)};
        if (n < 300) begin
          checks++;
          if (rnd[k] !== model[k]) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d ch %0d %h expected %h", n, k, rnd[k], model[k]);
          end
        end
      end
      if (rnd[0] == seed0 && period == 0) period = n;
    end
    checks++;
    if (period != 65535) begin failures++; $display("FAIL period %0d", period); end
    advance <= 1'b0;
    @(posedge clk); model[1] = rnd[1];
    repeat (3) @(posedge clk);
    #1; checks++;
    if (rnd[1] !== model[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
