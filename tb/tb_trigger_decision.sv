// tb_trigger_decision -- self-checking test of the windowed decision.
// A G stream with a random valid pattern is applied at the reference window
// size (90 samples). The testbench keeps its own list of the samples of each
// window and checks, on the window's last sample, win_done, win_max and
// win_trig = (max >= Gamma); on every valid sample it checks over and the
// sliding-window flag against a search over the last 90 valid samples.
// Windows both with and without a crossing must occur.
`timescale 1ns/1ps
module tb_trigger_decision;
  import lat_pkg::*;
  localparam int unsigned WIN = WIN_DEF;
  logic clk = 0, rst_n = 0, en = 1, valid = 0;
  g_t g = '0, gamma = GAMMA_DEF;
  logic over, trig_sliding, win_done, win_trig;
  g_t win_max;
  int checks = 0, failures = 0;

  trigger_decision dut (.*);
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

  initial begin
    g_t  win [$];
    g_t  last [$];
    g_t  mx;
    bit  slide;
    int  n_trig = 0, n_quiet = 0, n_windows = 0, n_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 30000; n++) begin
      valid = ($urandom_range(0, 4) != 0);
      en    = ($urandom_range(0, 19) != 0);
      // mostly noise below Gamma, occasional bursts above it
      if ((n / 500) % 3 == 0 && $urandom_range(0, 59) == 0) g = g_t'($urandom_range(681, 2000));
      else g = g_t'($urandom_range(0, 680));
      if ($urandom_range(0, 999) == 0) g = gamma;   // exact boundary
      @(posedge clk); #1;
      check(win_done == (en && valid && win.size() == WIN - 1), $sformatf("n=%0d win_done", n));
      if (en && valid) begin
        n_valid++;
        win.push_back(g);
        last.push_back(g);
        if (last.size() > WIN) void'(last.pop_front());
        slide = 0;
        foreach (last[j]) if (last[j] >= gamma) slide = 1;
        check(over == (g >= gamma), "over");
        check(trig_sliding == slide, $sformatf("n=%0d sliding", n));
        if (win.size() == WIN) begin
          mx = 0;
          foreach (win[j]) if (win[j] > mx) mx = win[j];
          check(win_max == mx, $sformatf("n=%0d win_max %0d vs %0d", n, win_max, mx));
          check(win_trig == (mx >= gamma), "win_trig");
          if (mx >= gamma) n_trig++; else n_quiet++;
          n_windows++;
          win.delete();
        end
      end
    end
    check(n_trig > 10 && n_quiet > 10, $sformatf("both outcomes seen (%0d/%0d)", n_trig, n_quiet));
    $display("windows=%0d triggered=%0d quiet=%0d", n_windows, n_trig, n_quiet);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
