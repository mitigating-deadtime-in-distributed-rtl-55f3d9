// tb_coherence_score -- self-checking test of G[n] = sum w_i Psi_eff_i^2.
// Random observables and weights for the 16 channels are applied with a
// random valid pattern. Each result is compared, three clocks later, with
// floor(sum w_i Psi_i^2 / 2^16) (saturated to 32 bits) and with the real
// value in sigma^2 units; the valid flag must follow with the same latency.
// A last case drives every channel to full scale (no wrap-around).
`timescale 1ns/1ps
module tb_coherence_score;
  import lat_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 0, rst_n = 0, en = 1, valid_in = 0;
  psi_t psi_eff [N];
  logic [W_W-1:0] w [N];
  g_t   g;
  logic valid_out;
  int checks = 0, failures = 0;

  coherence_score #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  longint exp_q [$];
  bit     vexp_q [$];
  real    rexp_q [$];

  initial begin
    longint s;
    real    r;
    for (int i = 0; i < N; i++) begin psi_eff[i] = '0; w[i] = W_ONE; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // pipeline is empty after reset; a result is seen after the 3rd edge
    for (int j = 0; j < 2; j++) begin exp_q.push_back(0); vexp_q.push_back(0); rexp_q.push_back(0.0); end
    for (int n = 0; n < 2000; n++) begin
      s = 0; r = 0.0;
      for (int i = 0; i < N; i++) begin
        psi_eff[i] = (n % 3 == 0) ? psi_t'($urandom_range(0, 2048)) - 18'sd1024
                                  : psi_t'($urandom_range(0, 60000)) - 18'sd30000;
        w[i] = (n < 500) ? W_ONE : W_W'($urandom_range(0, 1023));
        s += longint'(w[i]) * longint'(psi_eff[i]) * longint'(psi_eff[i]);
        r += (real'(w[i]) / 256.0) * (real'(psi_eff[i]) / 256.0) ** 2;
      end
      s = s >>> 16;
      if (s > 64'hFFFF_FFFF) s = 64'hFFFF_FFFF;
      valid_in = $urandom_range(0, 1);
      exp_q.push_back(s); vexp_q.push_back(valid_in); rexp_q.push_back(r);
      @(posedge clk); #1;
      begin
        longint e; bit ve; real re;
        e = exp_q.pop_front(); ve = vexp_q.pop_front(); re = rexp_q.pop_front();
        check(longint'(g) == e, $sformatf("n=%0d g=%0d exp=%0d", n, g, e));
        check(valid_out == ve, $sformatf("n=%0d valid", n));
        check(real'(g) / 256.0 - re < 0.01 * re + 0.1 && re - real'(g) / 256.0 < 0.01 * re + 0.1,
              $sformatf("n=%0d real %f vs %f", n, real'(g) / 256.0, re));
      end
    end
    // saturation
    for (int i = 0; i < N; i++) begin psi_eff[i] = -18'sd131072; w[i] = '1; end
    repeat (3) @(posedge clk);
    // 16 * 1023/256 * 512^2 * 256 = 1023 * 2^22: the 32-bit G just holds it
    #1 check(g == 32'd1023 * 32'd4194304, "full-scale inputs without overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
