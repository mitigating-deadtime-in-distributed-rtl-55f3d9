// iir_observable -- the liveness-aware effective observable of one channel.
//
//     Psi_eff[n] = k * Psi_eff[n-1] + (1 - k) * Psi[n] * L[n]
//
// While the channel is live this is an exponentially weighted moving average
// of Psi; while it is non-live the input term vanishes and the state decays
// as k * Psi_eff[n-1] instead of dropping to zero. The recursion is written
// with one multiplier:
//     x        = L ? Psi : 0
//     s[n]     = x + floor( k * (s[n-1] - x) )
// which equals k*s + (1-k)*x exactly for the Q0.16 k used here. The state s
// keeps STATE_XFRAC = 8 more fractional bits than Psi, so small values decay
// smoothly; Psi_eff is s with those bits dropped (floor). With 0 <= k < 1
// |s| never exceeds the largest |x| seen, so no overflow guard is needed.
//
// Timing: the state is the output register; Psi_eff for the (psi, live) pair
// presented with en = 1 appears one clock later. Reset clears the state, the
// only storage (one value per channel).
//
// Follows the paper: Eq. (3)/(4), one multiply-accumulate per sample, k a
// tunable input (0.90 in the reference configuration). Own choices: the
// fixed-point formats and floor rounding.
module iir_observable
  import lat_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  psi_t           psi,       // Psi_i[n]
  input  logic           live,      // L_i[n]
  input  logic [K_W-1:0] k,         // Q0.16 decay factor
  output psi_t           psi_eff    // Psi_eff_i[n]
);

  localparam int unsigned S_W = PSI_W + STATE_XFRAC;

  logic signed [S_W-1:0]     s_q, s_d, x;
  logic signed [S_W:0]       diff;
  logic signed [S_W+K_W+1:0] prod;

  always_comb begin
    x    = live ? {psi, {STATE_XFRAC{1'b0}}} : '0;
    diff = (S_W+1)'(s_q) - (S_W+1)'(x);
    prod = (S_W+K_W+2)'(diff) * signed'({1'b0, k});
    s_d  = x + S_W'(prod >>> K_W);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  s_q <= '0;
    else if (en) s_q <= s_d;
  end

  assign psi_eff = psi_t'(s_q >>> STATE_XFRAC);

endmodule
