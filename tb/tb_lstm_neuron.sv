// tb_lstm_neuron -- checks one LSTM unit against the real-valued reference.
// Random weights (|w| < 0.5), inputs (|x| < 1), hidden states (|h| < 1) and
// cell states (|c| < 2) are applied; c_next and h_next must agree with
// lstme_ref_pkg::lstm_unit within 0.01. A second set with weights up to 2
// drives the gates into saturation.
module tb_lstm_neuron;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;
  localparam int NI = 15, NH = 20, K = NI + NH + 1;
  fx_t x [NI];
  fx_t h_prev [NH];
  fx_t c_prev;
  fx_t params [N_GATES][K];
  fx_t c_next, h_next;
  real wr [], xr [], hr [];
  real c_ref, h_ref;
  int  checks = 0, failures = 0;

  lstm_neuron #(.N_IN(NI), .HIDDEN(NH)) dut (.*);

  function automatic fx_t rnd_fx(input real mag);
    return to_fx((real'($urandom_range(0, 20000)) / 10000.0 - 1.0) * mag);
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr = new[N_GATES*K];
    xr = new[NI];
    hr = new[NH];
    for (int n = 0; n < 600; n++) begin
      real wmag;
      wmag = (n < 400) ? 0.5 : 2.0;
      for (int q = 0; q < N_GATES; q++)
        for (int k = 0; k < K; k++) begin
          params[q][k] = rnd_fx(wmag);
          wr[q*K + k]  = to_real(params[q][k]);
        end
      for (int k = 0; k < NI; k++) begin x[k] = rnd_fx(1.0); xr[k] = to_real(x[k]); end
      for (int j = 0; j < NH; j++) begin h_prev[j] = rnd_fx(1.0); hr[j] = to_real(h_prev[j]); end
      c_prev = rnd_fx(2.0);
      #1;
      lstm_unit(wr, xr, hr, to_real(c_prev), c_ref, h_ref);
      checks += 2;
      if (absr(to_real(c_next) - c_ref) > 0.01 || absr(to_real(h_next) - h_ref) > 0.01) begin
        failures++;
        if (failures < 10)
          $display("FAIL n=%0d c=%f (ref %f) h=%f (ref %f)", n, to_real(c_next), c_ref, to_real(h_next), h_ref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
