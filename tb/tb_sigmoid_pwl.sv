// tb_sigmoid_pwl -- checks the sigmoid unit over the whole Q3.12 range.
// Every 3rd input code from -8 to +8 is applied; the output must lie within
// 0.021 of the exact logistic function, never leave [0, 1], and never fall
// by more than the 0.004 step of the approximation at |x| = 2.375. Key points (0 -> 0.5, large |x| -> 0/1) are exact.
module tb_sigmoid_pwl;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;
  fx_t x, y, y_last;
  int  checks = 0, failures = 0;
  real err, maxerr = 0.0;

  sigmoid_pwl dut (.x, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y_last = '0;
    for (int v = -32768; v <= 32767; v += 3) begin
      x = fx_t'(v);
      #1;
      err = absr(to_real(y) - sigmoid_exact(to_real(x)));
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > 0.021 || y < 0 || y > FX_ONE || (to_real(y_last) - to_real(y)) > 0.0045) begin
        failures++;
        if (failures < 10) $display("FAIL x=%f y=%f exact=%f", to_real(x), to_real(y), sigmoid_exact(to_real(x)));
      end
      y_last = y;
    end
    x = '0; #1; checks++; if (y !== FX_HALF) failures++;
    x = fx_t'(6 * 4096); #1; checks++; if (y !== FX_ONE) failures++;
    x = fx_t'(-6 * 4096); #1; checks++; if (y !== '0) failures++;
    $display("sigmoid max abs error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
