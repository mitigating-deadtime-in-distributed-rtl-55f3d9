// tb_psi_normalize -- self-checking test of pedestal subtraction and gain
// normalization. Random samples, pedestals and Q8.8 factors are applied and
// each output is compared, one clock later, with
// clamp((adc - pedestal) * gnorm, -2^17, 2^17-1) computed in the testbench,
// and with the real value (adc - pedestal) * gnorm / 256 in sigma units.
`timescale 1ns/1ps
module tb_psi_normalize;
  import lat_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  adc_t adc = '0, pedestal = 12'd300;
  logic [GN_W-1:0] gnorm = 16'd128;
  psi_t psi;
  int checks = 0, failures = 0;

  psi_normalize dut (.*);
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

  initial begin
    longint ref_v, hold;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(psi == 0, "reset");
    hold = 0;
    for (int n = 0; n < 3000; n++) begin
      adc = adc_t'($urandom_range(0, 4095));
      if (n % 4 == 0) adc = adc_t'(300 + $urandom_range(0, 20) - 10);  // noise-like
      pedestal = adc_t'($urandom_range(250, 350));
      gnorm = (n < 1500) ? GN_W'($urandom_range(0, 1024)) : GN_W'($urandom);
      en = ($urandom_range(0, 7) != 0);
      ref_v = (longint'(adc) - longint'(pedestal)) * longint'(gnorm);
      if (ref_v > 131071) ref_v = 131071;
      if (ref_v < -131072) ref_v = -131072;
      @(posedge clk); #1;
      if (en) begin
        check(longint'(psi) == ref_v, $sformatf("adc=%0d ped=%0d g=%0d psi=%0d ref=%0d",
                                                  adc, pedestal, gnorm, psi, ref_v));
        hold = ref_v;
      end else
        check(longint'(psi) == hold, "hold when en=0");
    end
    // one worked example: 2 counts above pedestal, sigma = 2 counts -> 1.0
    en = 1; adc = 12'd302; pedestal = 12'd300; gnorm = 16'd128;
    @(posedge clk); #1;
    check(psi == 18'sd256, "1 sigma example");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
