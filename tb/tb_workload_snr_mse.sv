// tb_workload_snr_mse -- signal fidelity of the effective observable under
// deadtime: SNR and reconstruction error against P_dead (16 channels,
// k = 0.90, 12-sample injected episodes).
//
// Events are SPE-like pulses of 9 sigma on 6 of the 16 channels over white
// unit-sigma noise (waveform mode, 8 ADC counts = 1 sigma), one event every
// 180 samples. For each P_dead in {0, 0.1, ..., 0.5} (per channel and
// 90-sample window, set as a per-sample onset 1 - (1 - P)^(1/90)) the
// testbench reads, sample by sample, the design's Psi, L and Psi_eff and
// compares two per-channel observables:
//   gated     Psi * L          (naive gating, state lost while dead)
//   effective Psi_eff          (the design's liveness-aware observable)
// Reconstruction error: the reference is the noiseless pulse passed through
// the same recursion with every sample live, r[n] = k r[n-1] + (1-k) s[n];
// the gated observable is held against the raw noiseless pulse s[n]. The
// mean squared error of each is taken over the non-live samples of event
// channels in the 60 samples after a pulse starts.
// SNR: mean square over the pulse region (samples 20..59 of an event window,
// event channels) divided by the variance over quiet samples (samples 30..89
// of the window after it, every channel), each observable against itself.
// Checks: during deadtime the effective observable's error is below that of
// naive gating at every P_dead > 0, its SNR exceeds the gated SNR at every
// point, and at P_dead = 0 no sample is non-live.
`timescale 1ns/1ps
module tb_workload_snr_mse;
  import lat_pkg::*;
  localparam int unsigned N = N_CH_DEF;
  localparam int NEV = 100;
  localparam int NP = 6;
  localparam int EV_CH = 6;
  localparam real EV_AMP = 9.0;
  localparam real KR = 58982.0 / 65536.0;
  localparam int NS = NEV * 180;

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
    repeat (NP * (NEV * 180 + 400) + 10000) @(posedge clk);
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

  // per sample of the current point (index from its first sample)
  real    truth [NS][N];   // noiseless pulse, sigma units
  real    gate  [NS][N];   // Psi * L read from the design
  real    eff   [NS][N];   // Psi_eff read from the design
  bit     dead  [NS][N];
  longint s1 = 0, s2 = 0;  // samples seen at the node and IIR outputs
  longint base = 0;
  logic [3:0] vv = '0;

  always @(posedge clk) begin
    #1;
    if (rst_n && vv[1]) begin
      longint j;
      j = s1 - base;
      if (j >= 0 && j < NS)
        for (int i = 0; i < N; i++) begin
          gate[j][i] = live[i] ? real'(psi[i]) / 256.0 : 0.0;
          dead[j][i] = !live[i];
        end
      s1++;
    end
    if (rst_n && vv[2]) begin
      longint j;
      j = s2 - base;
      if (j >= 0 && j < NS)
        for (int i = 0; i < N; i++) eff[j][i] = real'(psi_eff[i]) / 256.0;
      s2++;
    end
    vv <= {vv[2:0], (en && in_valid)};
  end

  int ev_ch [N];
  task automatic send(input longint j0, input bit with_event);
    for (int t = 0; t < 90; t++) begin
      for (int i = 0; i < N; i++) begin
        real v, sg;
        int  n;
        n = t - 20;
        sg = (with_event && ev_ch[i] && n >= 0) ? EV_AMP * (0.574 ** n - 0.036 ** n) : 0.0;
        truth[j0 + t][i] = sg;
        v = gauss() + sg;
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
      real pd, mse_e, mse_g, sig_e, sig_g, nz_e, nz_g, nz_e2, nz_g2;
      real snr_e, snr_g;
      int  n_dead, n_sig, n_nz;
      pd = 0.1 * p;
      live_cfg.p_dead = 16'(int'($floor(65536.0 * (1.0 - (1.0 - pd) ** (1.0 / 90.0)) + 0.5)));
      // one quiet window with the new setting before recording; the
      // pipeline is drained here, so s1 counts every sample sent so far
      base = s1 + 90;
      for (int t = 0; t < 90; t++) begin
        for (int i = 0; i < N; i++)
          adc_in[i] = adc_t'(300 + int'($floor(8.0 * gauss() + 0.5)));
        in_valid = 1;
        @(posedge clk); #1;
      end
      for (int e = 0; e < NEV; e++) begin
        for (int i = 0; i < N; i++) ev_ch[i] = 0;
        for (int c = 0; c < EV_CH; c++) begin
          int j;
          do j = $urandom_range(0, N - 1); while (ev_ch[j]);
          ev_ch[j] = 1;
        end
        send(longint'(e) * 180, 1);
        send(longint'(e) * 180 + 90, 0);
      end
      drain();
      // statistics
      mse_e = 0; mse_g = 0; n_dead = 0;
      sig_e = 0; sig_g = 0; n_sig = 0;
      nz_e = 0; nz_g = 0; nz_e2 = 0; nz_g2 = 0; n_nz = 0;
      for (int e = 0; e < NEV; e++) begin
        for (int i = 0; i < N; i++) begin
          real r;
          bit  evc;
          evc = truth[e * 180 + 21][i] != 0.0;
          r = 0.0;
          for (int t = 0; t < 90; t++) begin
            int j;
            j = e * 180 + t;
            r = KR * r + (1.0 - KR) * truth[j][i];
            if (evc && t >= 20 && t < 80 && dead[j][i]) begin
              mse_e += (eff[j][i] - r) ** 2;
              mse_g += (gate[j][i] - truth[j][i]) ** 2;
              n_dead++;
            end
            if (evc && t >= 20 && t < 60) begin
              sig_e += eff[j][i] ** 2; sig_g += gate[j][i] ** 2; n_sig++;
            end
          end
          for (int t = 120; t < 180; t++) begin
            int j;
            j = e * 180 + t;
            nz_e += eff[j][i]; nz_e2 += eff[j][i] ** 2;
            nz_g += gate[j][i]; nz_g2 += gate[j][i] ** 2;
            n_nz++;
          end
        end
      end
      snr_e = (sig_e / n_sig) / (nz_e2 / n_nz - (nz_e / n_nz) ** 2);
      snr_g = (sig_g / n_sig) / (nz_g2 / n_nz - (nz_g / n_nz) ** 2);
      if (n_dead > 0) begin mse_e /= n_dead; mse_g /= n_dead; end
      $display("P_dead=%0.1f  dead pulse samples=%0d  MSE effective=%0.4f gated=%0.4f  SNR effective=%0.2f gated=%0.2f",
               pd, n_dead, mse_e, mse_g, snr_e, snr_g);
      if (p == 0) check(n_dead == 0, "no non-live samples at P_dead = 0");
      else begin
        check(n_dead > 0, $sformatf("deadtime hits pulses at P=%0.1f", pd));
        check(mse_e < mse_g, $sformatf("effective observable error below gating at P=%0.1f", pd));
      end
      check(snr_e > snr_g, $sformatf("effective SNR above gated SNR at P=%0.1f", pd));
      base = s1 + 1000000;    // stop recording until the next point
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
