// tb_workload_deadtime_sweep -- trigger efficiency against deadtime
// probability, reference configuration (16 channels, k = 0.90,
// Gamma = 2.659, 90-sample windows).
//
// For each P_dead in {0, 0.1, ..., 0.5} the testbench injects NEV signal
// events into white unit-sigma noise (waveform mode, 8 ADC counts = 1 sigma)
// and counts the event windows in which the design triggers. An event puts an
// SPE-like pulse of EV_AMP sigma on EV_CH of the 16 channels, 20 samples into
// an even-numbered window; the odd window after it absorbs the tail.
// P_dead is read as the probability that a channel enters deadtime within
// one decision window; the design's per-sample onset register is set to
// p = 1 - (1 - P_dead)^(1/90), and each episode lasts 12 samples (200 ns).
//
// For comparison the testbench also evaluates, on the same Psi and L streams
// read from the design, the conventional multiplicity trigger
// H_i = (Psi_i >= 3.428) L_i, trigger if sum_i H_i >= 2 in some sample of the
// window. That baseline is not part of the design; it is computed here only
// to show the two behaviours side by side; with 12-sample episodes it is not
// expected to collapse the way the baseline of the original study does, so
// the two are printed but not compared.
// Checks: near-full efficiency with no deadtime, no rise of efficiency with
// P_dead beyond statistical slack, at least 0.75 efficiency at P_dead = 0.5
// (the level reported for the liveness-aware trigger), and a measured
// fraction of injected dead samples within 20 % of 12 p / (1 + 12 p).
`timescale 1ns/1ps
module tb_workload_deadtime_sweep;
  import lat_pkg::*;
  localparam int unsigned N = N_CH_DEF;
  localparam int NEV = 150;
  localparam int NP = 6;
  localparam int EV_CH = 6;
  localparam real EV_AMP = 9.0;          // pulse scale, sigma units
  localparam real THETA = 3.428;         // baseline threshold, sigma units

  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, src_sel = 1;
  logic hit [N];
  logic [7:0] npe [N];
  adc_t adc_in [N];
  logic ext_live [N];
  logic [15:0] amp_pe [N];
  adc_t pedestal [N];
  logic [GN_W-1:0] gnorm [N];
  logic [W_W-1:0] weight [N];
  logic [3:0] dly [N];
  logic noise_en = 0;
  logic [1:0] noise_shift [N] = '{default: 2'd0};
  live_cfg_t live_cfg;
  logic [K_W-1:0] k = K_DEF;
  g_t gamma = GAMMA_DEF;
  logic live [N], sat_dead [N], inj_dead [N];
  psi_t psi [N], psi_eff [N];
  g_t g, win_max;
  logic g_valid, over, trig_sliding, win_done, win_trig;

  lat_trigger_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (NP * (NEV + 4) * 180 + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 32'hFFFF_FFFE))) / 4294967296.0;
    u2 = (real'($urandom)) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // ---- monitors: windows are counted in valid samples from the start ----
  bit     counting = 0;          // event windows of the current point
  int     n_win = 0;             // decision windows seen
  int     prop_hits = 0, base_hits = 0;
  longint s_node = 0;            // valid samples seen at the node outputs
  bit     base_win [longint];    // baseline result per window index
  longint n_node = 0, n_inj = 0;  // node samples and injected-dead samples
  logic [3:0] vv = '0;

  always @(posedge clk) begin
    #1;
    if (rst_n && vv[1]) begin
      int m;
      longint w;
      m = 0;
      for (int i = 0; i < N; i++) begin
        if (live[i] && real'(psi[i]) / 256.0 >= THETA) m++;
        if (counting) begin n_node++; if (inj_dead[i]) n_inj++; end
      end
      w = s_node / 90;
      if (!base_win.exists(w)) base_win[w] = 0;
      if (m >= 2) base_win[w] = 1;
      s_node++;
    end
    if (rst_n && win_done) begin
      // window index n_win; even windows of a point carry events
      if (counting && n_win % 2 == 0) begin
        if (win_trig) prop_hits++;
        if (base_win.exists(n_win) && base_win[n_win]) base_hits++;
      end
      if (base_win.exists(n_win)) base_win.delete(n_win);
      n_win++;
    end
    vv <= {vv[2:0], (en && in_valid)};
  end

  // ---- stimulus ----
  int   ev_ch [N];
  task automatic run_window(input bit with_event);
    for (int t = 0; t < 90; t++) begin
      for (int i = 0; i < N; i++) begin
        real v;
        int  n;
        v = gauss();
        n = t - 20;
        if (with_event && ev_ch[i] && n >= 0)
          v += EV_AMP * (0.574 ** n - 0.036 ** n);
        adc_in[i] = adc_t'(300 + int'($floor(8.0 * v + 0.5)));
      end
      in_valid = 1;
      @(posedge clk); #1;
    end
  endtask

  real eff_p [NP], eff_b [NP];

  initial begin
    for (int i = 0; i < N; i++) begin
      hit[i] = 0; npe[i] = 0; ext_live[i] = 1; amp_pe[i] = 0;
      pedestal[i] = 12'd300; gnorm[i] = 16'd32; weight[i] = W_ONE; dly[i] = 0;
      adc_in[i] = 12'd300;
    end
    live_cfg = '{sat_level: 12'd4095, sat_recovery: 10'd12, p_dead: 16'd0,
                 dead_mode: DEAD_FIXED, dead_len: 10'd12, dead_spread: 8'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int p = 0; p < NP; p++) begin
      real pd;
      pd = 0.1 * p;
      live_cfg.p_dead = 16'(int'($floor(65536.0 * (1.0 - (1.0 - pd) ** (1.0 / 90.0)) + 0.5)));
      // two settling windows with the new setting (keeps window parity)
      run_window(0); run_window(0);
      wait_windows();
      prop_hits = 0; base_hits = 0; n_node = 0; n_inj = 0; counting = 1;
      for (int e = 0; e < NEV; e++) begin
        // choose EV_CH distinct channels
        for (int i = 0; i < N; i++) ev_ch[i] = 0;
        for (int c = 0; c < EV_CH; c++) begin
          int j;
          do j = $urandom_range(0, N - 1); while (ev_ch[j]);
          ev_ch[j] = 1;
        end
        run_window(1);
        run_window(0);
      end
      run_window(0); run_window(0);
      wait_windows();
      counting = 0;
      eff_p[p] = real'(prop_hits) / real'(NEV);
      eff_b[p] = real'(base_hits) / real'(NEV);
      begin
        real ps, fexp, fmeas;
        ps = real'(live_cfg.p_dead) / 65536.0;
        fexp = 12.0 * ps / (1.0 + 12.0 * ps);
        fmeas = real'(n_inj) / real'(n_node);
        $display("P_dead=%0.1f p_sample=%0d/65536 dead fraction=%0.4f (expect %0.4f)  efficiency: liveness-aware=%0.3f baseline=%0.3f",
                 pd, live_cfg.p_dead, fmeas, fexp, eff_p[p], eff_b[p]);
        if (p > 0)
          check(fmeas > 0.8 * fexp && fmeas < 1.2 * fexp,
                $sformatf("injected dead fraction at P=%0.1f", pd));
        else
          check(n_inj == 0, "no injection at P=0");
      end
    end
    check(eff_p[0] >= 0.95, "near-full efficiency without deadtime");
    for (int p = 1; p < NP; p++) begin
      check(eff_p[p] <= eff_p[0] + 0.03, $sformatf("no gain from deadtime at P=%0.1f", 0.1 * p));
    end
    check(eff_p[NP-1] >= 0.75, "efficiency at P_dead = 0.5");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Let the pipeline report every window given so far (windows are closed
  // a few clocks after their last sample).
  task automatic wait_windows();
    in_valid = 0;
    repeat (12) @(posedge clk);
    #1;
  endtask
endmodule
