// tb_lat_trigger_top -- end-to-end test of the liveness-aware trigger at its
// reference size (16 channels, 90-sample decision window, 16-tap alignment;
// no parameter is overridden).
//
// The testbench holds its own model of the network-level pipeline: for every
// valid sample it takes Psi_i and L_i, runs the recursion
// Psi_eff = k Psi_eff + (1-k) Psi L in integer form, applies the per-channel
// delays, forms G = sum w_i Psi_eff_i^2 and the 90-sample window maxima, and
// compares G (every valid sample), Psi_eff and every window decision with
// the design. In waveform phases Psi_i and L_i are themselves predicted from
// the injected ADC samples (pedestal subtraction, gain normalization,
// saturation recovery, front-end busy); in phases with random deadtime or
// emulated pulses they are taken from the design's own node outputs and
// only their statistics are checked.
//
// Phases (a drained pause with in_valid = 0 separates them):
//   A  waveform input, events with per-channel arrival offsets compensated
//      by the alignment delays, saturation on some channels, busy gaps;
//   B  emulated PMT pulses from hit strobes (input-select switch), noise on
//      with a channel-dependent level (odd channels at half deviation);
//   C  waveform input with injected deadtime, fixed-length episodes;
//   D  as C with distributed episode lengths and a higher P_dead.
// Each mechanism is counted and a mechanism that never occurred is a
// failure: saturation recovery, busy gaps, fixed and distributed injection,
// IIR decay through deadtime, aligned events, triggered and quiet windows,
// a trigger despite non-live channels, stream gaps and the input switch.
`timescale 1ns/1ps
module tb_lat_trigger_top;
  import lat_pkg::*;
  localparam int unsigned N = N_CH_DEF;
  localparam int unsigned WIN = WIN_DEF;
  localparam int unsigned MAX_DLY = 16;
  localparam int unsigned MAXOFF = 12;   // largest arrival offset of an event

  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, src_sel = 1;
  logic hit [N];
  logic [7:0] npe [N];
  adc_t adc_in [N];
  logic ext_live [N];
  logic [15:0] amp_pe [N];
  adc_t pedestal [N];
  logic [GN_W-1:0] gnorm [N];
  logic [W_W-1:0] weight [N];
  logic [$clog2(MAX_DLY)-1:0] dly [N];
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
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int c_sat = 0, c_busy = 0, c_inj_fixed = 0, c_inj_dist = 0, c_decay = 0;
  int c_events = 0, c_trig = 0, c_quiet = 0, c_trig_dead = 0, c_gaps = 0;
  int c_hitmode_trig = 0, c_switch = 0, c_dly = 0;
  int phase = 0;   // 0 A, 1 B, 2 C, 3 D

  // ---------------- stimulus-side prediction of Psi and L ----------------
  // Queues of predicted per-sample node values (phase A only).
  typedef struct { psi_t p [N]; bit l [N]; } node_t;
  node_t pred_q [$];
  bit    predict = 1;
  int    rec_left [N];

  function automatic node_t predict_node(input adc_t a [N], input bit busy_l [N]);
    node_t r;
    longint v;
    for (int i = 0; i < N; i++) begin
      v = (longint'(a[i]) - longint'(pedestal[i])) * longint'(gnorm[i]);
      if (v > 131071) v = 131071;
      if (v < -131072) v = -131072;
      r.p[i] = psi_t'(v);
      if (a[i] >= live_cfg.sat_level) begin
        r.l[i] = 0; rec_left[i] = int'(live_cfg.sat_recovery);
      end else if (rec_left[i] > 0) begin
        r.l[i] = 0; rec_left[i]--;
      end else r.l[i] = busy_l[i];
    end
    return r;
  endfunction

  // ---------------- reference model of the pipeline ----------------
  longint s_ref [N];                 // IIR state, frac 16
  psi_t   eff_hist [N][$];           // Psi_eff history per channel (front = newest)
  g_t     gexp_q [$];
  psi_t   effexp_q [$];              // flattened N per sample
  g_t     win_vals [$];
  bit     win_dead [$];              // some channel non-live in this sample
  int     sample_no = 0;

  function automatic void model_sample(input psi_t p [N], input bit l [N]);
    longint x, gsum;
    bit anydead = 0;
    gsum = 0;
    for (int i = 0; i < N; i++) begin
      psi_t e, a;
      x = l[i] ? longint'(p[i]) * 256 : 0;
      s_ref[i] = (longint'(k) * s_ref[i] + (65536 - longint'(k)) * x) >>> 16;
      e = psi_t'(s_ref[i] >>> 8);
      effexp_q.push_back(e);
      eff_hist[i].push_front(e);
      if (eff_hist[i].size() > MAX_DLY + 2) void'(eff_hist[i].pop_back());
      a = (int'(dly[i]) < eff_hist[i].size()) ? eff_hist[i][dly[i]] : '0;
      gsum += longint'(weight[i]) * longint'(a) * longint'(a);
      if (!l[i]) anydead = 1;
    end
    gsum = gsum >>> 16;
    if (gsum > 64'hFFFF_FFFF) gsum = 64'hFFFF_FFFF;
    gexp_q.push_back(g_t'(gsum));
    win_dead.push_back(anydead);
  endfunction

  // ---------------- monitor ----------------
  logic [3:0] vv = '0;   // in_valid as seen by successive edges
  psi_t prev_eff [N];
  initial for (int i = 0; i < N; i++) prev_eff[i] = '0;

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      // node outputs of the sample taken two edges ago
      if (vv[1]) begin
        node_t obs;
        for (int i = 0; i < N; i++) begin obs.p[i] = psi[i]; obs.l[i] = live[i]; end
        if (predict) begin
          node_t pr;
          pr = pred_q.pop_front();
          for (int i = 0; i < N; i++) begin
            check(obs.p[i] == pr.p[i], $sformatf("s=%0d ch%0d psi %0d exp %0d", sample_no, i, obs.p[i], pr.p[i]));
            check(obs.l[i] == pr.l[i], $sformatf("s=%0d ch%0d live %0d exp %0d", sample_no, i, obs.l[i], pr.l[i]));
          end
        end
        for (int i = 0; i < N; i++) begin
          if (!obs.l[i] && sat_dead[i]) c_sat++;
          if (!obs.l[i] && !sat_dead[i] && !inj_dead[i]) c_busy++;
          if (inj_dead[i] && phase == 2) c_inj_fixed++;
          if (inj_dead[i] && phase == 3) c_inj_dist++;
        end
        model_sample(obs.p, obs.l);
        sample_no++;
      end
      // Psi_eff of the sample taken three edges ago
      if (vv[2]) begin
        for (int i = 0; i < N; i++) begin
          psi_t e;
          e = effexp_q.pop_front();
          check(psi_eff[i] == e, $sformatf("ch%0d psi_eff %0d exp %0d", i, psi_eff[i], e));
          // decay through deadtime: the design's L for this sample was
          // reported one edge earlier; a non-live step scales by k
          if (prev_eff[i] > 18'sd1024 && psi_eff[i] < prev_eff[i] && psi_eff[i] > 0 &&
              (real'(psi_eff[i]) / real'(prev_eff[i])) > 0.895 &&
              (real'(psi_eff[i]) / real'(prev_eff[i])) < 0.905) c_decay++;
          prev_eff[i] = psi_eff[i];
        end
      end
      // the decision refers to G values already collected, so close the
      // window before collecting this edge's G
      if (win_done) begin
        g_t mx;
        mx = 0;
        check(win_vals.size() == WIN, $sformatf("window of %0d samples", win_vals.size()));
        foreach (win_vals[j]) if (win_vals[j] > mx) mx = win_vals[j];
        check(win_max == mx, $sformatf("win_max %0d exp %0d", win_max, mx));
        check(win_trig == (mx >= gamma), "win_trig");
        if (win_trig) begin
          c_trig++;
          if (win_dead_in_window && phase >= 2) c_trig_dead++;
          if (phase == 1) c_hitmode_trig++;
        end else c_quiet++;
        win_vals.delete();
        win_dead_in_window = 0;
      end
      if (g_valid) begin
        g_t ge;
        bit dd;
        ge = gexp_q.pop_front();
        dd = win_dead.pop_front();
        check(g == ge, $sformatf("G %0d exp %0d", g, ge));
        win_vals.push_back(ge);
        if (dd) win_dead_in_window = 1;
      end
    end
    vv <= {vv[2:0], (en && in_valid)};
  end
  bit win_dead_in_window = 0;

  // ---------------- stimulus helpers ----------------
  // Gaussian-like noise of 2 counts deviation (sum of six uniforms on
  // {0,1,2}, each of variance 2/3).
  function automatic int noise2();
    int s;
    s = 0;
    for (int j = 0; j < 6; j++) s += $urandom_range(0, 2);
    return s - 6;
  endfunction

  int   ev_t0 = -1000, ev_amp = 0, ev_sat = -1;
  int   off [N];
  bit   busy_now [N];
  int   busy_left [N];

  // SPE-like shape for waveform events, in counts
  function automatic int shape(input int n, input int amp);
    if (n < 0) return 0;
    return int'(real'(amp) * (0.574 ** n - 0.036 ** n));
  endfunction

  // One valid sample in waveform mode.
  task automatic wave_sample(input int t, input int busy_rate);
    adc_t a [N];
    bit   bl [N];
    for (int i = 0; i < N; i++) begin
      int v;
      v = int'(pedestal[i]) + noise2() + shape(t - ev_t0 - off[i], ev_amp);
      if (i == ev_sat && t - ev_t0 - off[i] == 1) v = 4095;
      if (v > 4095) v = 4095;
      if (v < 0) v = 0;
      a[i] = adc_t'(v);
      adc_in[i] = a[i];
      if (busy_left[i] > 0) busy_left[i]--;
      else if ($urandom_range(0, 9999) < busy_rate) busy_left[i] = $urandom_range(1, 10);
      ext_live[i] = (busy_left[i] == 0);
      bl[i] = ext_live[i];
      hit[i] = 0;
    end
    if (predict) pred_q.push_back(predict_node(a, bl));
    in_valid = 1;
    @(posedge clk); #1;
  endtask

  task automatic pause(input int n);
    in_valid = 0;
    c_gaps++;
    repeat (n) @(posedge clk);
    #1;
  endtask

  // Run a waveform phase of nsamp samples with an event every 'period'.
  task automatic wave_phase(input int nsamp, input int period, input int busy_rate);
    for (int t = 0; t < nsamp; t++) begin
      if (t % period == 40) begin
        ev_t0 = t;
        ev_amp = (t / period) % 4 == 3 ? 0 : 20 + $urandom_range(0, 20);   // some empty slots
        ev_sat = ((t / period) % 3 == 0) ? int'($urandom_range(0, N - 1)) : -1;
        if (ev_amp > 0) c_events++;
      end
      if ($urandom_range(0, 499) == 0) pause($urandom_range(1, 4));
      wave_sample(t, busy_rate);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      hit[i] = 0; npe[i] = 0; adc_in[i] = 12'd300; ext_live[i] = 1;
      amp_pe[i] = 16'(5120 + (i % 5) * 256 - 512);   // about +/-10 % gain spread
      pedestal[i] = adc_t'(296 + (i % 9));
      gnorm[i] = 16'd128;                          // sigma = 2 counts
      weight[i] = W_ONE;
      off[i] = (i * 5) % (MAXOFF + 1);             // event arrival offsets
      dly[i] = 4'(MAXOFF - off[i]);                // alignment compensates
      if (dly[i] != 0) c_dly++;
      rec_left[i] = 0; busy_left[i] = 0; s_ref[i] = 0;
    end
    live_cfg = '{sat_level: 12'd4095, sat_recovery: 10'd20, p_dead: 16'd0,
                 dead_mode: DEAD_FIXED, dead_len: 10'd30, dead_spread: 8'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---- A: waveform input, deterministic liveness ----
    phase = 0; predict = 1;
    wave_phase(6000, 300, 20);
    pause(12);

    // ---- B: emulated pulses from hits ----
    phase = 1; predict = 0; src_sel = 0; c_switch++;
    noise_en = 1;
    // channel-dependent noise: odd channels at half the deviation
    for (int i = 0; i < N; i++) begin
      noise_shift[i] = 2'(i % 2);
      gnorm[i] = (i % 2) ? 16'd79 : 16'd39;        // 256 / 3.25 or 6.5 counts
    end
    pause(12);
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) begin
        hit[i] = (t % 300 == 40 + off[i]) && (i % 4 != 3);
        npe[i] = 8'($urandom_range(20, 40));
        ext_live[i] = 1;
      end
      in_valid = 1;
      @(posedge clk); #1;
    end
    for (int i = 0; i < N; i++) hit[i] = 0;
    pause(12);

    // ---- C: waveform input, fixed-length injected deadtime ----
    phase = 2; src_sel = 1; c_switch++; noise_en = 0;
    for (int i = 0; i < N; i++) gnorm[i] = 16'd128;
    live_cfg.p_dead = 16'd655;      // 0.01 per live sample
    live_cfg.dead_mode = DEAD_FIXED; live_cfg.dead_len = 10'd30;
    pause(12);
    wave_phase(6000, 300, 0);
    pause(12);

    // ---- D: distributed episode lengths, higher P_dead ----
    phase = 3;
    live_cfg.p_dead = 16'd1966;     // 0.03
    live_cfg.dead_mode = DEAD_DISTRIBUTED; live_cfg.dead_spread = 8'd15;
    pause(12);
    wave_phase(6000, 300, 0);
    in_valid = 0;
    repeat (20) @(posedge clk);
    #1;

    check(pred_q.size() == 0 && gexp_q.size() == 0, "all predicted samples consumed");
    $display("samples=%0d events=%0d triggered windows=%0d quiet windows=%0d",
             sample_no, c_events, c_trig, c_quiet);
    $display("saturation=%0d busy=%0d inj_fixed=%0d inj_dist=%0d decay_steps=%0d",
             c_sat, c_busy, c_inj_fixed, c_inj_dist, c_decay);
    $display("trig_with_dead_channels=%0d hitmode_trig=%0d gaps=%0d switches=%0d delayed_channels=%0d",
             c_trig_dead, c_hitmode_trig, c_gaps, c_switch, c_dly);
    check(c_sat > 0, "saturation recovery happened");
    check(c_busy > 0, "front-end busy happened");
    check(c_inj_fixed > 0, "fixed-length injected deadtime happened");
    check(c_inj_dist > 0, "distributed injected deadtime happened");
    check(c_decay > 0, "IIR decay through deadtime happened");
    check(c_trig > 0, "a window triggered");
    check(c_quiet > 0, "a window stayed quiet");
    check(c_trig_dead > 0, "trigger despite non-live channels");
    check(c_hitmode_trig > 0, "trigger on emulated pulses");
    check(c_gaps > 0 && c_switch > 0 && c_dly > 0 && c_events > 0, "gaps, input switch, alignment, events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
