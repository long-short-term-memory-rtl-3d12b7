// tb_dropout_layer -- checks the dropout gating.
// (1) drop_en = 0: every channel passes unchanged, keep is all ones.
// (2) drop_en = 1: for each channel keep must equal (rnd >= drop_ratio) where
//     rnd is read from the layer's generator, a dropped channel must read 0
//     and a kept one its input; across 2000 steps the fraction dropped must
//     be within 0.03 of drop_ratio/65536 for ratios 0.25 and 0.5.
// (3) drop_ratio = 0 keeps all channels.
module tb_dropout_layer;
  import lstme_pkg::*;
  localparam int CH = 8;
  logic clk = 1'b0, rst_n = 1'b0, advance = 1'b0, drop_en = 1'b0;
  logic [15:0] drop_ratio = '0;
  fx_t feat_in [CH];
  fx_t feat_out [CH];
  logic [CH-1:0] keep;
  int checks = 0, failures = 0;

  dropout_layer #(.CH(CH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic en, input logic [15:0] ratio, input int n_steps);
    int dropped = 0;
    real frac;
    drop_en <= en; drop_ratio <= ratio; advance <= 1'b1;
    for (int n = 0; n < n_steps; n++) begin
      for (int k = 0; k < CH; k++) begin
        logic [15:0] v;
        v = 16'($urandom_range(1, 65535));
        feat_in[k] <= fx_t'(v);
      end
      @(posedge clk); #1;
      for (int k = 0; k < CH; k++) begin
        logic exp_keep;
        exp_keep = !en || (dut.rnd[k] >= ratio);
        checks++;
        if (keep[k] !== exp_keep || feat_out[k] !== (exp_keep ? feat_in[k] : fx_t'(0))) begin
          failures++;
          if (failures < 10) $display("FAIL ch %0d keep=%0b exp=%0b out=%h in=%h", k, keep[k], exp_keep, feat_out[k], feat_in[k]);
        end
        if (!keep[k]) dropped++;
      end
    end
    frac = real'(dropped) / real'(n_steps * CH);
    $display("drop_en=%0b ratio=%0d dropped fraction %f", en, ratio, frac);
    checks++;
    if ((frac - real'(en ? ratio : 0) / 65536.0) > 0.03 || (real'(en ? ratio : 0) / 65536.0 - frac) > 0.03)
      failures++;
  endtask

  initial begin
    for (int k = 0; k < CH; k++) feat_in[k] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run(1'b0, 16'd32768, 500);
    run(1'b1, 16'd16384, 2000);
    run(1'b1, 16'd32768, 2000);
    run(1'b1, 16'd0, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
