// tb_liveness_monitor -- self-checking test of the liveness function L[n].
// Phases:
//   1. all causes off: the channel must stay live;
//   2. front-end busy: L follows ext_live with one clock of latency;
//   3. saturation: one sample at the ADC ceiling gives exactly
//      1 + sat_recovery non-live samples, re-armed by a second saturation;
//   4. fixed-length injection (P_dead = 0.05, W = 20): every non-live run is
//      a whole number of 20-sample episodes and the number of episode starts
//      per live sample matches P_dead;
//   5. distributed injection (W = 20, spread mask 7): single episodes last
//      17..24 samples and their mean is W + 0.5 (the draw is W - 3 + U{0..7}).
`timescale 1ns/1ps
module tb_liveness_monitor;
  import lat_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, ext_live = 1;
  adc_t adc = 12'd300;
  live_cfg_t cfg;
  logic live, sat_dead, inj_dead;
  int checks = 0, failures = 0;

  liveness_monitor dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Apply one sample and return L for it (one clock later).
  task automatic step(output bit l);
    @(posedge clk); #1;
    l = live;
  endtask

  initial begin
    bit l;
    int run, n_live, n_onset, n_runs, n_single, sum_single, n_bad;
    cfg = '{sat_level: 12'd4095, sat_recovery: 10'd12, p_dead: 16'd0,
            dead_mode: DEAD_FIXED, dead_len: 10'd20, dead_spread: 8'd0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // 1. nothing non-live
    for (int n = 0; n < 500; n++) begin
      adc = adc_t'($urandom_range(250, 4000));
      step(l);
      check(l == 1, "live with no cause");
    end
    // 2. busy input
    for (int n = 0; n < 500; n++) begin
      ext_live = $urandom_range(0, 3) != 0;
      begin bit e; e = ext_live; step(l); check(l == e, "follows ext_live"); end
    end
    ext_live = 1;
    // 3. saturation + recovery
    adc = 12'd4095; step(l); check(l == 0 && sat_dead, "saturated sample non-live");
    adc = 12'd300;
    for (int j = 0; j < 12; j++) begin step(l); check(l == 0 && sat_dead, $sformatf("recovery %0d", j)); end
    step(l); check(l == 1, "live after recovery");
    adc = 12'd4095; step(l); adc = 12'd300;
    repeat (5) step(l);
    adc = 12'd4095; step(l); check(l == 0, "re-saturation"); adc = 12'd300;
    for (int j = 0; j < 12; j++) begin step(l); check(l == 0, "re-armed recovery"); end
    step(l); check(l == 1, "live after re-armed recovery");
    // 4. fixed-length injection
    cfg.p_dead = 16'd3277;   // 0.05
    run = 0; n_live = 0; n_onset = 0;
    for (int n = 0; n < 40000; n++) begin
      step(l);
      if (!l) begin run++; check(inj_dead && !sat_dead, "cause flags"); end
      else begin
        n_live++;
        if (run > 0) begin
          check(run % 20 == 0, $sformatf("fixed run length %0d", run));
          n_onset += run / 20;
        end
        run = 0;
      end
    end
    begin
      real p;
      p = real'(n_onset) / real'(n_live + n_onset);
      $display("fixed: onsets=%0d live=%0d p=%f", n_onset, n_live, p);
      check(p > 0.042 && p < 0.058, $sformatf("onset probability %f", p));
    end
    // 5. distributed lengths
    cfg.p_dead = 16'd655;    // 0.01, so episodes rarely touch
    cfg.dead_mode = DEAD_DISTRIBUTED; cfg.dead_spread = 8'd7;
    run = 0; n_runs = 0; n_single = 0; sum_single = 0; n_bad = 0;
    for (int n = 0; n < 100000; n++) begin
      step(l);
      if (!l) run++;
      else begin
        if (run > 0) begin
          n_runs++;
          if (run >= 17 && run <= 24) begin n_single++; sum_single += run; end
          else if (run < 17) n_bad++;
        end
        run = 0;
      end
    end
    begin
      real m;
      m = real'(sum_single) / real'(n_single);
      $display("distributed: runs=%0d single=%0d mean=%f", n_runs, n_single, m);
      check(n_bad == 0, "no episode shorter than W - 3");
      check(n_single > 0.9 * n_runs && n_runs > 500, "episodes counted");
      check(m > 20.2 && m < 20.8, $sformatf("mean length %f", m));
    end
    // p_dead = 0 switches injection off
    cfg.p_dead = 0;
    repeat (30) step(l);
    for (int n = 0; n < 1000; n++) begin step(l); check(l == 1, "no injection at p=0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
