// tb_workload_saturation_sweep -- recovery of the coherence score after
// saturation-induced non-liveness, against the ADC ceiling (16 channels,
// k = 0.90, 60 events per point, 12-sample = 200 ns recovery interval).
//
// Each event puts an SPE-like pulse on 8 of the 16 channels with amplitudes
// drawn between 20 and 60 sigma over white unit-sigma noise (waveform mode,
// 8 ADC counts = 1 sigma). Before the event the saturation level is set to
// pedestal + s * A_max, where A_max is the largest noiseless pulse peak of the
// event and s the ceiling scale (0.2 ... 1.0, lower = more clipping); every
// sample at or above it makes the channel non-live for itself plus 12
// samples. Per event the testbench finds the saturation-induced non-live
// interval (first to last sample with any channel in sat_dead), takes the
// peak of G up to its end ("pre-peak") and the peak of G over the 12 samples
// that follow ("post"), and counts the event as recovered when
// post >= 0.5 * pre-peak.
// The recovery probability is printed for each scale; the checks hold what
// the design must do whatever the curve: nearly every event saturates (at
// scale 1.0 noise decides, so only some do), more
// clipping saturates more channels, and every channel is live again and G is
// back at noise level by the end of the tail window.
`timescale 1ns/1ps
module tb_workload_saturation_sweep;
  import lat_pkg::*;
  localparam int unsigned N = N_CH_DEF;
  localparam int NEV = 60;
  localparam int NS = 9;
  localparam int EV_CH = 8;
  localparam int REC = 12;

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
    repeat (NS * (NEV + 1) * (180 + 20) + 10000) @(posedge clk);
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

  // per valid sample: G, any channel in saturation deadtime, all channels live
  real    gv    [longint];
  bit     satv  [longint];
  int     nsatv [longint];
  bit     livev [longint];
  longint s_g = 0, s_node = 0;
  logic [3:0] vv = '0;

  always @(posedge clk) begin
    #1;
    if (rst_n && vv[1]) begin
      bit a, l;
      int c;
      a = 0; l = 1; c = 0;
      for (int i = 0; i < N; i++) begin
        if (sat_dead[i]) begin a = 1; c++; end
        if (!live[i]) l = 0;
      end
      satv[s_node] = a; nsatv[s_node] = c; livev[s_node] = l;
      s_node++;
    end
    if (rst_n && g_valid) begin
      gv[s_g] = real'(g) / 256.0;
      s_g++;
    end
    vv <= {vv[2:0], (en && in_valid)};
  end

  int  ev_ch [N];
  real ev_a  [N];

  task automatic run_window(input bit with_event);
    for (int t = 0; t < 90; t++) begin
      for (int i = 0; i < N; i++) begin
        real v;
        int  n, c;
        v = gauss();
        n = t - 20;
        if (with_event && ev_ch[i] && n >= 0)
          v += ev_a[i] * (0.574 ** n - 0.036 ** n);
        c = 300 + int'($floor(8.0 * v + 0.5));
        if (c > 4095) c = 4095;
        adc_in[i] = adc_t'(c);
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

  real msat [NS];

  initial begin
    for (int i = 0; i < N; i++) begin
      hit[i] = 0; npe[i] = 0; ext_live[i] = 1; amp_pe[i] = 0;
      pedestal[i] = 12'd300; gnorm[i] = 16'd32; weight[i] = W_ONE; dly[i] = 0;
      adc_in[i] = 12'd300;
    end
    live_cfg = '{sat_level: 12'd4095, sat_recovery: 10'(REC), p_dead: 16'd0,
                 dead_mode: DEAD_FIXED, dead_len: 10'd12, dead_spread: 8'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run_window(0);
    drain();
    for (int p = 0; p < NS; p++) begin
      real scale;
      int  n_sat_ev, n_rec, n_back, sum_ch;
      scale = 0.2 + 0.1 * p;
      n_sat_ev = 0; n_rec = 0; n_back = 0; sum_ch = 0;
      for (int e = 0; e < NEV; e++) begin
        real    amax, pre, post;
        longint base, first, last;
        int     maxch;
        for (int i = 0; i < N; i++) begin ev_ch[i] = 0; ev_a[i] = 0.0; end
        amax = 0.0;
        for (int c = 0; c < EV_CH; c++) begin
          int j;
          do j = $urandom_range(0, N - 1); while (ev_ch[j]);
          ev_ch[j] = 1;
          ev_a[j] = 20.0 + 40.0 * real'($urandom_range(0, 1000)) / 1000.0;
          // noiseless peak of the pulse shape is at n = 1: 0.574 - 0.036
          if (8.0 * 0.538 * ev_a[j] > amax) amax = 8.0 * 0.538 * ev_a[j];
        end
        live_cfg.sat_level = 12'(300 + int'($floor(scale * amax + 0.5)));
        base = s_node;
        run_window(1);
        run_window(0);
        drain();
        // locate the saturation-induced non-live interval
        first = -1; last = -1; maxch = 0;
        for (longint s = base; s < base + 180; s++) begin
          if (satv[s]) begin
            if (first < 0) first = s;
            last = s;
          end
          if (nsatv[s] > maxch) maxch = nsatv[s];
        end
        sum_ch += maxch;
        if (first >= 0) begin
          n_sat_ev++;
          pre = 0.0; post = 0.0;
          for (longint s = base; s <= last; s++) if (gv[s] > pre) pre = gv[s];
          for (longint s = last + 1; s <= last + REC && s < base + 180; s++)
            if (gv[s] > post) post = gv[s];
          if (post >= 0.5 * pre) n_rec++;
        end
        if (livev[base + 179] && gv[base + 179] < real'(GAMMA_DEF) / 256.0) n_back++;
        for (longint s = base; s < base + 180; s++) begin
          gv.delete(s); satv.delete(s); nsatv.delete(s); livev.delete(s);
        end
      end
      msat[p] = real'(sum_ch) / real'(NEV);
      $display("ceiling scale=%0.1f  events saturating=%0d/%0d  mean saturated channels=%0.2f  recovery probability=%0.3f",
               scale, n_sat_ev, NEV, msat[p], real'(n_rec) / real'(NEV));
      // at scale 1.0 the ceiling sits at the noiseless peak, so noise decides
      check(n_sat_ev >= (p < NS - 1 ? NEV * 9 / 10 : 1),
            $sformatf("events saturate at scale %0.1f", scale));
      check(n_back == NEV, $sformatf("channels live and G quiet after the event at scale %0.1f", scale));
    end
    check(msat[0] > msat[NS-1], "more clipping saturates more channels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
