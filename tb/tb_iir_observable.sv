// tb_iir_observable -- self-checking test of the liveness-aware IIR stage.
//
// Drives random Psi samples and a liveness pattern with long live stretches,
// short and long non-live gaps, and compares every output sample with two
// reference models kept in the testbench:
//   * an exact integer model written as s = floor((k*s + (2^16-k)*x) / 2^16),
//     the textbook form of the recursion (the design uses a one-multiplier
//     rearrangement of it);
//   * a real-valued model of Psi_eff[n] = k Psi_eff[n-1] + (1-k) Psi[n] L[n]
//     that must agree within 0.02 sigma.
// It also checks the one-clock latency, that each non-live sample scales
// the previous output by k (decay, not collapse), and that the state stays
// bounded by the largest input.
`timescale 1ns/1ps
module tb_iir_observable;
  import lat_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, live = 1;
  psi_t psi = '0;
  logic [K_W-1:0] k = K_DEF;
  psi_t psi_eff;
  int checks = 0, failures = 0;

  iir_observable dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint s_ref;      // exact state, frac 16
  real    r_ref;      // real-valued model
  real    kr;
  int     n_dead_checks = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    longint x, prev_out;
    int     gap;
    kr = real'(k) / 65536.0;
    s_ref = 0; r_ref = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1 check(psi_eff == 0, "reset value");
    gap = 0;
    for (int n = 0; n < 4000; n++) begin
      // liveness pattern: random gaps of 1..40 samples
      if (gap > 0) begin live = 0; gap--; end
      else begin
        live = 1;
        if ($urandom_range(0, 99) < 4) gap = $urandom_range(1, 40);
      end
      // Psi: noise-like values with occasional large pulses
      if ($urandom_range(0, 49) == 0) psi = psi_t'($urandom_range(0, 40000)) - 18'sd20000;
      else                            psi = psi_t'($urandom_range(0, 1024)) - 18'sd512;
      en = ($urandom_range(0, 9) != 0);   // occasional stalls
      prev_out = psi_eff;
      @(posedge clk);
      #1;
      if (en) begin
        x = live ? longint'(psi) * 256 : 0;
        s_ref = (longint'(k) * s_ref + (65536 - longint'(k)) * x) >>> 16;
        r_ref = kr * r_ref + (1.0 - kr) * (live ? real'(psi) / 256.0 : 0.0);
        check(longint'(psi_eff) == (s_ref >>> 8),
              $sformatf("n=%0d exact psi_eff=%0d ref=%0d psi=%0d live=%0d", n, psi_eff, s_ref >>> 8, psi, live));
        check((real'(psi_eff) / 256.0 - r_ref) < 0.02 && (r_ref - real'(psi_eff) / 256.0) < 0.02,
              $sformatf("n=%0d real model %f vs %f", n, real'(psi_eff) / 256.0, r_ref));
        if (!live && (prev_out > 400 || prev_out < -400)) begin
          // decay by k, not collapse to zero
          real ratio;
          ratio = real'(psi_eff) / real'(prev_out);
          check(ratio > 0.885 && ratio < 0.915,
                $sformatf("n=%0d decay ratio %f", n, ratio));
          n_dead_checks++;
        end
      end else begin
        check(longint'(psi_eff) == (s_ref >>> 8), "hold when en=0");
      end
    end
    check(n_dead_checks > 20, "enough decay samples exercised");
    // bounded: constant max input converges and stays below it
    en = 1; live = 1; psi = 18'sd131071;
    repeat (300) @(posedge clk);
    #1 check(psi_eff <= 18'sd131071 && psi_eff > 18'sd130000, "BIBO bound, converges to input");
    // long deadtime: decays toward zero, stays non-negative
    live = 0;
    repeat (300) @(posedge clk);
    #1 check(psi_eff >= 0 && psi_eff < 4, "decays to zero over long deadtime");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
