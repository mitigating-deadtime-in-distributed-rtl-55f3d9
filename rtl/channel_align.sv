// channel_align -- programmable per-channel delay that lines up the effective
// observables of different nodes in time before they are combined.
//
// Signals from one physical event reach the nodes of the array with small
// relative offsets (light travel time, cable and timing-distribution
// offsets). Each channel is delayed by its own whole number of samples,
// dly = 0 .. MAX_DLY-1, set from calibration, so that correlated activity
// enters the coherence score in the same sample.
//
//     out[n] = in[n - dly]           (a tapped shift register)
//
// Timing: registered output, so the total latency is dly + 1 enabled clocks.
// The taps are cleared by reset, so a freshly reset channel delivers zeros
// until its line has filled. Changing dly takes effect on the next sample.
//
// The paper names multi-node alignment as part of the coherence stage and
// points to sub-nanosecond timing distribution for it, but gives no
// structure; the whole-sample delay line and MAX_DLY = 16 are this design's
// choice.
module channel_align
  import lat_pkg::*;
#(
  parameter int unsigned MAX_DLY = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  psi_t                       din,
  input  logic [$clog2(MAX_DLY)-1:0] dly,
  output psi_t                       dout
);

  psi_t taps [MAX_DLY-1];   // taps[j] = in[n-1-j]
  psi_t sel;

  always_comb sel = (dly == '0) ? din : taps[dly - 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < MAX_DLY - 1; j++) taps[j] <= '0;
      dout <= '0;
    end else if (en) begin
      taps[0] <= din;
      for (int j = 1; j < MAX_DLY - 1; j++) taps[j] <= taps[j-1];
      dout <= sel;
    end
  end

endmodule
