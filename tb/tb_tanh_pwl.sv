// tb_tanh_pwl -- checks the tanh unit over the whole Q3.12 range.
// Every 3rd input code is applied; the output must be within 0.042 of the
// exact tanh, stay in [-1, 1], be non-decreasing apart from the small step
// of the sigmoid approximation, and be odd-symmetric
// (tanh(-x) = -tanh(x) within one LSB).
module tb_tanh_pwl;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;
  fx_t x, y, y_last, ypos;
  int  checks = 0, failures = 0;
  real err, maxerr = 0.0;

  tanh_pwl dut (.x, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y_last = -FX_ONE;
    for (int v = -32767; v <= 32767; v += 3) begin
      x = fx_t'(v);
      #1;
      err = absr(to_real(y) - tanh_exact(to_real(x)));
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > 0.042 || y < -FX_ONE || y > FX_ONE || (to_real(y_last) - to_real(y)) > 0.0085) begin
        failures++;
        if (failures < 10) $display("FAIL x=%f y=%f exact=%f", to_real(x), to_real(y), tanh_exact(to_real(x)));
      end
      y_last = y;
    end
    for (int n = 0; n < 200; n++) begin
      x = fx_t'($urandom_range(0, 32767));
      #1; ypos = y;
      x = -x;
      #1;
      checks++;
      if (absr(to_real(y) + to_real(ypos)) > 1.5 / 4096.0) begin
        failures++;
        $display("FAIL symmetry x=%f", to_real(x));
      end
    end
    $display("tanh max abs error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
