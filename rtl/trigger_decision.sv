// trigger_decision -- windowed threshold decision on the coherence score
//
//     Trigger = 1( max_{n in W} G[n] >= Gamma )
//
// Valid samples of G are grouped into consecutive, non-overlapping decision
// windows of WIN samples (90 = 1.5 us at 60 MSPS). A running maximum is kept
// over the window; on its last sample the module reports, for one clock,
//   win_done = 1, win_max = max of G over the window,
//   win_trig = (win_max >= gamma).
// Alongside, two streaming outputs are given for every valid sample:
//   over     = (G[n] >= gamma)
//   trig_sliding = some G in the last WIN samples (this one included)
//                  reached gamma, i.e. the same rule over a sliding window.
// All outputs are registered: they refer to the sample given one enabled
// clock earlier; win_done is high for exactly one clock. Reset restarts the window count at the next valid sample.
//
// Follows the paper: Eq. (6), threshold Gamma = 2.659 (in units of G),
// |W| = 1.5 us. The paper calibrates thresholds "per decision window" but
// also speaks of "a fixed-size sliding window"; the windowed decision
// (win_trig) is the primary output and trig_sliding serves the sliding
// reading. The window alignment to the stream start is this design's choice.
module trigger_decision
  import lat_pkg::*;
#(
  parameter int unsigned WIN = WIN_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic valid,
  input  g_t   g,
  input  g_t   gamma,
  output logic over,
  output logic trig_sliding,
  output logic win_done,
  output logic win_trig,
  output g_t   win_max
);

  localparam int unsigned CW = $clog2(WIN + 1);

  logic [CW-1:0] pos_q;        // position inside the current window
  g_t            max_q;        // running max, excluding this sample
  logic [CW-1:0] since_q;      // samples since the last crossing, saturating
  g_t            max_d;
  logic          hit;

  always_comb begin
    hit   = (g >= gamma);
    max_d = (pos_q == '0 || g > max_q) ? g : max_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q        <= '0;
      max_q        <= '0;
      since_q      <= CW'(WIN);
      over         <= 1'b0;
      trig_sliding <= 1'b0;
      win_done     <= 1'b0;
      win_trig     <= 1'b0;
      win_max      <= '0;
    end else begin
      win_done <= 1'b0;                       // one-clock strobe
      if (en && valid) begin
        over         <= hit;
        trig_sliding <= hit || (since_q < CW'(WIN - 1));
        if (hit)                  since_q <= '0;
        else if (since_q != CW'(WIN)) since_q <= since_q + 1'b1;
        max_q <= max_d;
        if (pos_q == CW'(WIN - 1)) begin
          pos_q    <= '0;
          win_done <= 1'b1;
          win_max  <= max_d;
          win_trig <= (max_d >= gamma);
        end else begin
          pos_q <= pos_q + 1'b1;
        end
      end
    end
  end

endmodule
