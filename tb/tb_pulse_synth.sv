// tb_pulse_synth -- self-checking test of the PMT/digitizer emulator.
// With noise off, a single hit of npe photoelectrons must produce
//   adc[n] = pedestal + A * (KD^n - KR^n),  A = npe * amp_pe / 256,
// the sampled difference-of-exponentials shape (0 at the hit sample), checked
// against real arithmetic within 1 count, one clock after the hit. Pulse
// amplitude must scale with npe and with the channel gain amp_pe, a large
// deposit must clip at 4095, and with noise on the baseline must have mean
// pedestal and the deviation of the triangular noise (sqrt(2*255/12) ~ 6.5 counts
// at noise_shift = 0).
`timescale 1ns/1ps
module tb_pulse_synth;
  import lat_pkg::*;
  localparam logic [15:0] KD = 16'd37604, KR = 16'd2338;
  logic clk = 0, rst_n = 0, en = 1, hit = 0, noise_en = 0;
  logic [7:0] npe = 8'd1;
  logic [15:0] amp_pe = 16'd5120;   // 20 counts per PE
  adc_t pedestal = 12'd300;
  logic [1:0] noise_shift = 2'd0;
  adc_t adc;
  int checks = 0, failures = 0;

  pulse_synth #(.KD(KD), .KR(KR)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Fire one hit and compare the following 40 samples with the model.
  task automatic pulse(input int n_pe, input int amp, output int peak);
    real kd, kr, a, v;
    kd = real'(KD) / 65536.0; kr = real'(KR) / 65536.0;
    a  = real'(n_pe) * real'(amp) / 256.0;
    npe = 8'(n_pe); amp_pe = 16'(amp);
    peak = 0;
    for (int n = 0; n < 40; n++) begin
      hit = (n == 0);
      @(posedge clk); #1;
      v = a * (kd ** n - kr ** n);
      if (v + 300.0 > 4095.0) v = 4095.0 - 300.0;
      check(real'(adc) - (300.0 + v) <= 1.01 && (300.0 + v) - real'(adc) <= 1.01,
            $sformatf("npe=%0d n=%0d adc=%0d model=%f", n_pe, n, adc, 300.0 + v));
      if (int'(adc) - 300 > peak) peak = int'(adc) - 300;
    end
    hit = 0;
    repeat (60) @(posedge clk);   // let it decay fully
    #1;
  endtask

  initial begin
    int p1, p3, pg, pbig;
    real sum, sum2, m, sd;
    int lo, hi;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk); #1;
    check(adc == 12'd300, "baseline is the pedestal");
    pulse(1, 5120, p1);
    pulse(3, 5120, p3);
    pulse(1, 5632, pg);            // +10 % channel gain
    $display("peaks: 1pe=%0d 3pe=%0d gain1.1=%0d", p1, p3, pg);
    check(p1 >= 10 && p1 <= 12, "SPE peak (20 * (KD-KR) counts)");
    check(p3 >= 3 * p1 - 2 && p3 <= 3 * p1 + 2, "linear in npe");
    check(pg > p1, "gain scaling");
    pulse(255, 65535, pbig);
    check(pbig == 4095 - 300, "clipped at the ADC ceiling");
    // noise
    noise_en = 1; sum = 0; sum2 = 0; lo = 4095; hi = 0;
    for (int n = 0; n < 20000; n++) begin
      @(posedge clk); #1;
      sum += real'(adc); sum2 += real'(adc) * real'(adc);
      if (adc < lo) lo = adc;
      if (adc > hi) hi = adc;
    end
    m = sum / 20000.0; sd = $sqrt(sum2 / 20000.0 - m * m);
    $display("noise: mean=%f sd=%f range=%0d..%0d", m, sd, lo, hi);
    check(m > 299.8 && m < 300.2, "noise mean at pedestal");
    check(sd > 6.2 && sd < 6.8, "noise deviation");
    check(lo >= 285 && hi <= 315, "noise range");
    // en = 0 holds the output
    begin adc_t h; en = 0; h = adc; repeat (5) @(posedge clk); #1 check(adc == h, "hold when en=0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
