// tb_workload_calibration -- noise-only false-trigger rate of the reference
// configuration (16 channels, k = 0.90, Gamma = 2.659, 90-sample windows,
// every channel live).
//
// The thresholds of the trigger were chosen so that pure noise crosses them
// in about one decision window in a thousand. This testbench feeds white
// Gaussian noise (Box-Muller, 8 ADC counts deviation, normalized to unit
// sigma by gnorm = 32) on all channels in waveform mode and counts windows
// with win_trig. A floating-point model of the same statistic (k = 0.9,
// N = 16, W = 90) gives about 1.3e-3 per window; the test requires the count
// over NWIN windows to lie in a wide Poisson band around that (no cycle-exact
// comparison: the rate is the quantity of interest). It also checks the mean
// of G, which for unit noise is N (1-k)/(1+k) = 0.842.
`timescale 1ns/1ps
module tb_workload_calibration;
  import lat_pkg::*;
  localparam int unsigned N = N_CH_DEF;
  localparam int NWIN = 12000;

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
    repeat (NWIN * 90 + 5000) @(posedge clk);
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

  int  n_win = 0, n_trig = 0;
  real gsum = 0.0;
  longint gcount = 0;
  always @(posedge clk) begin
    #1;
    if (win_done && n_win >= 2) begin   // skip the settling windows
      if (win_trig) n_trig++;
    end
    if (win_done) n_win++;
    if (g_valid && n_win >= 2) begin gsum += real'(g) / 256.0; gcount++; end
  end

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
    in_valid = 1;
    while (n_win < NWIN + 2) begin
      for (int i = 0; i < N; i++) begin
        int v;
        v = 300 + int'($floor(8.0 * gauss() + 0.5));
        adc_in[i] = adc_t'(v);
      end
      @(posedge clk); #1;
    end
    begin
      real rate, gm;
      rate = real'(n_trig) / real'(NWIN);
      gm = gsum / real'(gcount);
      $display("noise-only windows=%0d triggered=%0d rate=%e mean G=%f", NWIN, n_trig, rate, gm);
      // expected ~16 at 1.3e-3; 4..40 is far outside Poisson fluctuation
      check(n_trig >= 4 && n_trig <= 40, "false-trigger rate near 1e-3 per window");
      check(gm > 0.80 && gm < 0.89, "mean G near N(1-k)/(1+k)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
