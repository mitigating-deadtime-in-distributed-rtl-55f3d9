// tb_workload_k_sweep -- sensitivity of the reference trigger to the decay
// factor k (16 channels, Gamma = 2.659 held fixed, 90-sample windows).
//
// For each k in {0.70, 0.80, 0.90, 0.95, 0.99} the testbench runs NQ
// noise-only windows (white unit-sigma noise, 8 ADC counts = 1 sigma) and NEV
// signal windows (an SPE-like pulse of 9 sigma on 6 of the 16 channels, each
// signal window followed by one tail window), with injected deadtime at
// P_dead = 0.3 per channel and window (12-sample episodes). It reports the
// false-trigger fraction of the noise windows, the mean of G over noise and
// the event efficiency.
// The checks hold the design's own arithmetic, not a curve: the mean of G over
// live noise must follow sum_i sigma_eff^2 = N (1-k)/(1+k) within 10 %
// (deadtime lowers it by a few per cent), the efficiency must be at least
// 0.9 at k = 0.80 and 0.90, and at k = 0.90 the false-trigger fraction must
// stay at the calibrated level (at most 1 %).
// Because Gamma is not recalibrated and the update law scales every new
// sample by (1-k), both the noise level and the signal level of G move with
// k: small k lifts the noise of G up to Gamma (false triggers in almost every
// window at k <= 0.80), large k shrinks a short pulse below Gamma (efficiency
// falls off above 0.90). That trend is printed, not checked.
`timescale 1ns/1ps
module tb_workload_k_sweep;
  import lat_pkg::*;
  localparam int unsigned N = N_CH_DEF;
  localparam int NQ = 600;
  localparam int NEV = 100;
  localparam int NK = 5;
  localparam int EV_CH = 6;
  localparam real EV_AMP = 9.0;

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
    repeat (NK * (NQ + 2 * NEV + 8) * 90 + 10000) @(posedge clk);
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

  // window bookkeeping: the stimulus tags each window it sends; the monitor
  // reads the tags in order as win_done strobes arrive.
  int     tag_q [$];             // 0 settle/tail, 1 noise, 2 event
  int     n_noise_trig = 0, n_ev_trig = 0;
  real    gsum = 0.0;
  longint gcnt = 0;
  int     cur_tag = 0;
  longint g_in_win = 0;

  always @(posedge clk) begin
    #1;
    if (rst_n && g_valid) begin
      if (g_in_win == 0) cur_tag = (tag_q.size() > 0) ? tag_q[0] : 0;
      if (cur_tag == 1) begin gsum += real'(g) / 256.0; gcnt++; end
      g_in_win = (g_in_win + 1) % 90;
    end
    if (rst_n && win_done) begin
      int t;
      t = tag_q.pop_front();
      if (t == 1 && win_trig) n_noise_trig++;
      if (t == 2 && win_trig) n_ev_trig++;
    end
  end

  int ev_ch [N];
  task automatic run_window(input int tag);
    tag_q.push_back(tag);
    if (tag == 2) begin
      for (int i = 0; i < N; i++) ev_ch[i] = 0;
      for (int c = 0; c < EV_CH; c++) begin
        int j;
        do j = $urandom_range(0, N - 1); while (ev_ch[j]);
        ev_ch[j] = 1;
      end
    end
    for (int t = 0; t < 90; t++) begin
      for (int i = 0; i < N; i++) begin
        real v;
        int  n;
        v = gauss();
        n = t - 20;
        if (tag == 2 && ev_ch[i] && n >= 0)
          v += EV_AMP * (0.574 ** n - 0.036 ** n);
        adc_in[i] = adc_t'(300 + int'($floor(8.0 * v + 0.5)));
      end
      in_valid = 1;
      @(posedge clk); #1;
    end
  endtask

  task automatic drain();
    in_valid = 0;
    repeat (12) @(posedge clk);
    #1;
  endtask

  real kv [NK] = '{0.70, 0.80, 0.90, 0.95, 0.99};

  initial begin
    for (int i = 0; i < N; i++) begin
      hit[i] = 0; npe[i] = 0; ext_live[i] = 1; amp_pe[i] = 0;
      pedestal[i] = 12'd300; gnorm[i] = 16'd32; weight[i] = W_ONE; dly[i] = 0;
      adc_in[i] = 12'd300;
    end
    // P_dead = 0.3 per window -> per-sample onset 1 - 0.7^(1/90)
    live_cfg = '{sat_level: 12'd4095, sat_recovery: 10'd12,
                 p_dead: 16'(int'($floor(65536.0 * (1.0 - 0.7 ** (1.0 / 90.0)) + 0.5))),
                 dead_mode: DEAD_FIXED, dead_len: 10'd12, dead_spread: 8'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int p = 0; p < NK; p++) begin
      real fq, eff, gm, gexp;
      k = K_W'(int'($floor(kv[p] * 65536.0 + 0.5)));
      n_noise_trig = 0; n_ev_trig = 0; gsum = 0.0; gcnt = 0;
      // settle: memory of the previous point decays (k^180 is negligible
      // for k <= 0.95; at 0.99 the two windows leave a few per cent)
      for (int s = 0; s < 4; s++) run_window(0);
      for (int q = 0; q < NQ; q++) run_window(1);
      for (int e = 0; e < NEV; e++) begin run_window(2); run_window(0); end
      drain();
      fq = real'(n_noise_trig) / real'(NQ);
      eff = real'(n_ev_trig) / real'(NEV);
      gm = gsum / real'(gcnt);
      gexp = real'(N) * (1.0 - kv[p]) / (1.0 + kv[p]);
      $display("k=%0.2f (%0d/65536)  noise: mean G=%0.3f (live-noise value %0.3f) false-trigger=%0.4f  efficiency=%0.3f",
               kv[p], k, gm, gexp, fq, eff);
      check(gm > 0.85 * gexp && gm < 1.10 * gexp, $sformatf("mean noise G at k=%0.2f", kv[p]));
      if (p == 1 || p == 2) check(eff >= 0.9, $sformatf("efficiency at k=%0.2f", kv[p]));
      if (p == 2) check(fq <= 0.01, "false-trigger fraction at the calibrated k");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
