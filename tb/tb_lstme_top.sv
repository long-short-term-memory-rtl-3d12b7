// tb_lstme_top -- end-to-end test of the equalizer at its default size
// (15-sample window, one LSTM layer of 20 hidden units, 5-tap FIR).
//
// A random bit stream passes through a small channel model (three-tap
// inter-symbol interference plus uniform noise) to give the received
// samples. Random parameters are loaded through the parameter bus into every
// layer, the fully connected neuron and the FIR filter; the hidden state is
// cleared; then the samples are streamed with random idle gaps, first with
// dropout off, then with dropout on (drop ratio 0.5), then again after a
// mid-run state_clear. The testbench recomputes every output with the
// real-valued reference model (window, LSTM step per layer, dropout mask
// read from each dropout layer as it is applied, fully connected neuron,
// FIR) and checks eq_out within 0.03, eq_bit against eq_out, and that each
// output appears exactly LAYERS + 3 cycles after its sample.
//
// Mechanisms counted, each must occur: parameter writes, idle input gaps,
// state clears, dropped channels, non-trivial FIR taps, and both decision
// values on eq_bit.
module tb_lstme_top;
  import lstme_pkg::*;
  import lstme_ref_pkg::*;

  localparam int ND = 15, NH = 20, NL = 1, NT = 5;
  localparam int KF = ND + NH + 1, KN = NH + NH + 1;
  localparam int N_SAMPLES = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  logic param_we = 1'b0;
  logic [PADDR_W-1:0] param_addr = '0;
  fx_t  param_wdata = '0;
  logic state_clear = 1'b0, drop_en = 1'b0;
  logic [15:0] drop_ratio = 16'd32768;
  logic sample_valid = 1'b0;
  fx_t  sample_in = '0;
  fx_t  eq_out;
  logic eq_bit, out_valid;

  lstme_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_param_writes = 0, n_gaps = 0, n_clears = 0, n_dropped = 0, n_fir_taps = 0;
  int n_bit0 = 0, n_bit1 = 0, n_outputs = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // reference parameters and state
  real wl [NL][NH][];          // per layer, per unit parameter vector
  real wfc [];
  real bfir [NT];
  real win [ND];
  real href [NL][NH];
  real cref [NL][NH];
  real fir_hist [NT];
  // pipeline bookkeeping
  real    q_win [$];           // ND words per sample, newest first
  longint q_cycle [$];
  logic [NH-1:0] q_mask [NL][$];

  function automatic fx_t rnd_fx(input real mag);
    return to_fx((real'($urandom_range(0, 20000)) / 10000.0 - 1.0) * mag);
  endfunction

  // record the dropout mask each layer applies to its output
  for (genvar l = 0; l < NL; l++) begin : g_mon
    always @(posedge clk) begin
      #1;
      if (dut.lay_valid[l]) begin
        q_mask[l].push_back(dut.g_layer[l].u_drop.keep);
        n_dropped += NH - $countones(dut.g_layer[l].u_drop.keep);
      end
    end
  end

  // stimulus is driven at the falling edge, the design samples it at the next rising edge
  task automatic pwrite(input logic [3:0] region, input int off, input fx_t v);
    @(negedge clk);
    param_we = 1'b1;
    param_addr = {region, POFF_W'(off)};
    param_wdata = v;
    n_param_writes++;
  endtask

  // reference computation of one output, at the time it leaves the design
  function automatic real ref_output(input real w [ND], input logic [NH-1:0] masks [NL]);
    real x [], hv [], hn [], cn [], hd [], y, s;
    x = new[ND];
    for (int k = 0; k < ND; k++) x[k] = w[k];
    for (int l = 0; l < NL; l++) begin
      hv = new[NH]; hn = new[NH]; cn = new[NH];
      for (int u = 0; u < NH; u++) hv[u] = href[l][u];
      for (int u = 0; u < NH; u++) lstm_unit(wl[l][u], x, hv, cref[l][u], cn[u], hn[u]);
      for (int u = 0; u < NH; u++) begin href[l][u] = hn[u]; cref[l][u] = cn[u]; end
      hd = new[NH];
      for (int u = 0; u < NH; u++) hd[u] = masks[l][u] ? hn[u] : 0.0;
      x = hd;
    end
    y = fc(wfc, x);
    for (int k = NT-1; k > 0; k--) fir_hist[k] = fir_hist[k-1];
    fir_hist[0] = y;
    s = 0.0;
    for (int k = 0; k < NT; k++) s += bfir[k] * fir_hist[k];
    return sat(s);
  endfunction

  // output checker
  always @(posedge clk) begin
    #2;
    if (out_valid) begin
      real exp_y;
      real w [ND];
      logic [NH-1:0] masks [NL];
      longint c0;
      if (q_cycle.size() == 0) begin
        failures++;
        $display("FAIL output without a sample");
      end else begin
        for (int k = 0; k < ND; k++) w[k] = q_win.pop_front();
        c0 = q_cycle.pop_front();
        for (int l = 0; l < NL; l++) masks[l] = q_mask[l].pop_front();
        exp_y = ref_output(w, masks);
        n_outputs++;
        checks += 3;
        if (cycle - c0 != NL + 3) begin
          failures++;
          $display("FAIL latency %0d cycles, expected %0d", cycle - c0, NL + 3);
        end
        if (absr(to_real(eq_out) - exp_y) > 0.03) begin
          failures++;
          if (failures < 10) $display("FAIL output %0d eq_out=%f ref=%f", n_outputs, to_real(eq_out), exp_y);
        end
        if (eq_bit !== (eq_out >= FX_HALF)) failures++;
        if (eq_bit) n_bit1++; else n_bit0++;
      end
    end
  end

  task automatic stream(input int n_samples);
    int bits [3];
    bits = '{0, 0, 0};
    for (int n = 0; n < n_samples; n++) begin
      real r;
      if ($urandom_range(0, 5) == 0) begin
        @(negedge clk);
        sample_valid = 1'b0;
        n_gaps++;
      end
      bits[2] = bits[1]; bits[1] = bits[0]; bits[0] = $urandom_range(0, 1);
      r = 0.6 * bits[0] + 0.25 * bits[1] + 0.1 * bits[2]
        + (real'($urandom_range(0, 1000)) / 1000.0 - 0.5) * 0.1;
      @(negedge clk);
      sample_valid = 1'b1;
      sample_in = to_fx(r);
      for (int k = ND-1; k > 0; k--) win[k] = win[k-1];
      win[0] = to_real(sample_in);
      for (int k = 0; k < ND; k++) q_win.push_back(win[k]);
      q_cycle.push_back(cycle);
    end
    @(negedge clk);
    sample_valid = 1'b0;
    repeat (NL + 6) @(posedge clk);
  endtask

  task automatic clear_state();
    @(negedge clk);
    state_clear = 1'b1;
    @(negedge clk);
    state_clear = 1'b0;
    for (int l = 0; l < NL; l++)
      for (int u = 0; u < NH; u++) begin href[l][u] = 0.0; cref[l][u] = 0.0; end
    n_clears++;
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < ND; k++) win[k] = 0.0;
    for (int k = 0; k < NT; k++) fir_hist[k] = 0.0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // load the LSTM layers
    for (int l = 0; l < NL; l++) begin
      int kk;
      kk = (l == 0) ? KF : KN;
      for (int u = 0; u < NH; u++) wl[l][u] = new[N_GATES * kk];
      for (int q = 0; q < N_GATES; q++)
        for (int u = 0; u < NH; u++)
          for (int k = 0; k < kk; k++) begin
            fx_t v;
            v = rnd_fx(0.5);
            wl[l][u][q*kk + k] = to_real(v);
            pwrite(4'(l), (q*NH + u)*kk + k, v);
          end
    end
    // fully connected neuron
    wfc = new[NH+1];
    for (int j = 0; j <= NH; j++) begin
      fx_t v;
      v = (j == NH) ? fx_t'(0) : rnd_fx(3.0);
      wfc[j] = to_real(v);
      pwrite(REGION_FC, j, v);
    end
    // FIR: smoothing taps
    for (int k = 0; k < NT; k++) begin
      fx_t v;
      v = to_fx((k == 0) ? 0.5 : 0.5 / real'(NT - 1) + (real'($urandom_range(0, 100)) - 50.0) / 2000.0);
      bfir[k] = to_real(v);
      if (v != FX_ONE && v != 0) n_fir_taps++;
      pwrite(REGION_FIR, k, v);
    end
    @(negedge clk);
    param_we = 1'b0;
    clear_state();
    drop_en = 1'b0;
    stream(N_SAMPLES / 3);
    drop_en = 1'b1;
    stream(N_SAMPLES / 3);
    clear_state();
    drop_en = 1'b0;
    stream(N_SAMPLES / 3);
    checks++;
    if (q_cycle.size() != 0) begin failures++; $display("FAIL %0d samples never came out", q_cycle.size()); end
    $display("outputs %0d, parameter writes %0d, input gaps %0d, state clears %0d, dropped channels %0d, FIR taps %0d, eq_bit 0/1 %0d/%0d",
             n_outputs, n_param_writes, n_gaps, n_clears, n_dropped, n_fir_taps, n_bit0, n_bit1);
    checks += 7;
    if (n_param_writes == 0) failures++;
    if (n_gaps == 0) failures++;
    if (n_clears == 0) failures++;
    if (n_dropped == 0) begin failures++; $display("FAIL dropout never dropped a channel"); end
    if (n_fir_taps == 0) failures++;
    if (n_bit0 == 0 || n_bit1 == 0) begin failures++; $display("FAIL eq_bit never toggled"); end
    if (n_outputs != N_SAMPLES / 3 * 3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
