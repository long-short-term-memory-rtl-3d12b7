// tb_lstm_param_mem -- checks the layer parameter store at its full default
// size (15 inputs, 20 hidden units, 2880 words): all words read 0 after
// reset, every word written with a random value reads back on q the next
// cycle, and writes to other words do not disturb it.
module tb_lstm_param_mem;
  import lstme_pkg::*;
  localparam int DEPTH = 2880;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [POFF_W-1:0] waddr = '0;
  fx_t  wdata = '0;
  fx_t  q [DEPTH];
  fx_t  model [DEPTH];
  int   checks = 0, failures = 0;

  lstm_param_mem dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    for (int k = 0; k < DEPTH; k++) begin
      checks++;
      if (q[k] !== '0) failures++;
      model[k] = '0;
    end
    for (int k = 0; k < DEPTH; k++) begin
      we    <= 1'b1;
      waddr <= POFF_W'(k);
      wdata <= fx_t'($urandom());
      @(posedge clk); #1;
      model[k] = wdata;
      checks++;
      if (q[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d = %0d expected %0d", k, q[k], model[k]);
      end
    end
    we <= 1'b0;
    // writes beyond DEPTH are ignored
    @(posedge clk);
    we <= 1'b1; waddr <= POFF_W'(DEPTH); wdata <= 16'h1234;
    @(posedge clk); we <= 1'b0;
    @(posedge clk); #1;
    for (int k = 0; k < DEPTH; k++) begin
      checks++;
      if (q[k] !== model[k]) begin
        failures++;
        if (failures < 10) $display("FAIL final word %0d", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
