// tb_channel_align -- self-checking test of the per-channel delay line.
// A random stream is pushed through while the delay setting is changed now
// and then; every output is compared with the input history,
// out = in[n - dly] (zero before the stream started), one clock later.
`timescale 1ns/1ps
module tb_channel_align;
  import lat_pkg::*;
  localparam int unsigned MAX_DLY = 16;
  logic clk = 0, rst_n = 0, en = 0;
  psi_t din = '0;
  logic [$clog2(MAX_DLY)-1:0] dly = '0;
  psi_t dout;
  int checks = 0, failures = 0;
  int dly_seen [MAX_DLY];

  channel_align #(.MAX_DLY(MAX_DLY)) dut (.*);
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
    psi_t hist [$];
    psi_t expv, hold;
    int   d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    hold = '0;
    for (int n = 0; n < 4000; n++) begin
      if (n % 97 == 0) dly = 4'((n / 97) % MAX_DLY);
      din = psi_t'($urandom);
      en  = ($urandom_range(0, 9) != 0);
      d   = int'(dly);
      if (en) begin
        hist.push_front(din);
        expv = (d < hist.size()) ? hist[d] : '0;
      end
      @(posedge clk); #1;
      if (en) begin
        check(dout == expv, $sformatf("n=%0d dly=%0d out=%0d exp=%0d", n, d, dout, expv));
        hold = expv;
        dly_seen[d]++;
      end else check(dout == hold, "hold when en=0");
      if (hist.size() > 40) void'(hist.pop_back());
    end
    for (int j = 0; j < MAX_DLY; j++) check(dly_seen[j] > 0, $sformatf("delay %0d exercised", j));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
