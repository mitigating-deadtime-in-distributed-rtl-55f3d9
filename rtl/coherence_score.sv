// coherence_score -- network-level energy-like coherence statistic
//
//     G[n] = sum_{i=1..N} w_i * Psi_eff_i[n]^2
//
// computed over the N aligned effective observables with per-channel
// calibration/geometry weights w_i (unsigned, W_FRAC = 8, 1.0 = 256).
// Pipeline (three registers, one result per enabled clock):
//   1. square every channel           sq_i  = Psi_eff_i^2      (frac 16)
//   2. weight every channel           wsq_i = w_i * sq_i       (frac 24)
//   3. add all channels and rescale   G     = sum >> 16        (frac 8)
// G saturates at the top of its G_W-bit range. The adder of stage 3 is a
// plain sum that synthesis maps to an adder tree.
// valid_in is carried along with the data: valid_out marks the G belonging to
// a valid input sample, three enabled clocks later.
//
// Follows the paper: Eq. (5), weights optional per channel, an energy
// statistic that maps to multipliers and a pipelined adder tree. Own
// choices: pipeline depth, formats and saturation.
module coherence_score
  import lat_pkg::*;
#(
  parameter int unsigned N = N_CH_DEF
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           valid_in,
  input  psi_t           psi_eff [N],
  input  logic [W_W-1:0] w       [N],
  output g_t             g,
  output logic           valid_out
);

  localparam int unsigned SQ_W  = 2 * PSI_W;             // unsigned square
  localparam int unsigned WSQ_W = SQ_W + W_W;
  localparam int unsigned SUM_W = WSQ_W + $clog2(N + 1);
  localparam int unsigned SHIFT = 2 * PSI_FRAC + W_FRAC - G_FRAC;

  logic [SQ_W-1:0]  sq_q  [N];
  logic [W_W-1:0]   w_q   [N];
  logic [WSQ_W-1:0] wsq_q [N];
  logic [2:0]       v_q;

  logic [SUM_W-1:0] sum;
  logic [SUM_W-1:0] scaled;
  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum = sum + SUM_W'(wsq_q[i]);
    scaled = sum >> SHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        sq_q[i]  <= '0;
        w_q[i]   <= '0;
        wsq_q[i] <= '0;
      end
      g   <= '0;
      v_q <= '0;
    end else if (en) begin
      for (int i = 0; i < N; i++) begin
        sq_q[i]  <= SQ_W'(psi_eff[i] * psi_eff[i]);
        w_q[i]   <= w[i];                    // weight travels with its sample
        wsq_q[i] <= sq_q[i] * w_q[i];
      end
      g   <= (scaled > SUM_W'({G_W{1'b1}})) ? '1 : scaled[G_W-1:0];
      v_q <= {v_q[1:0], valid_in};
    end
  end

  assign valid_out = v_q[2];

endmodule
