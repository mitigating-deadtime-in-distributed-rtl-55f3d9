// liveness_monitor -- produces the binary liveness L_i[n] of one channel.
//
// A channel is non-live (L = 0) in a sample when any of these holds:
//   * saturation: the ADC sample is at or above cfg.sat_level (the hard ADC
//     ceiling); the channel then stays non-live for cfg.sat_recovery further
//     samples (re-armed while the input stays saturated);
//   * front-end busy: ext_live = 0 (buffer full, local veto or reset held by
//     the front end);
//   * injected deadtime: in a sample where the channel is otherwise live, a
//     new deadtime episode starts with probability cfg.p_dead / 65536. In
//     DEAD_FIXED mode it lasts cfg.dead_len samples (deterministic recovery);
//     in DEAD_DISTRIBUTED mode its length is drawn uniformly in
//     dead_len - m/2 .. dead_len + m/2 (m = cfg.dead_spread, a 2^j-1 mask),
//     i.e. about a mean dead_len, never below one sample.
// Saturation and injected episodes share one down-counter: a new cause only
// ever extends the current non-live interval.
//
// Outputs are registered: live, sat_dead and inj_dead for the sample
// presented with en = 1 appear one clock later, aligned with the output of
// psi_normalize, which has the same latency. p_dead = 0 disables injection.
//
// Follows the paper: L_i in {0,1}; saturation followed by a recovery
// interval; onset probability P_dead; fixed or distributed episode length
// about a mean W. Own choices: the Bernoulli draw per live sample from an
// xorshift32 generator, the uniform length distribution, the counter
// sharing and the busy input.
module liveness_monitor
  import lat_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h0BAD_5EED  // non-zero
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  adc_t      adc,
  input  logic      ext_live,
  input  live_cfg_t cfg,
  output logic      live,       // L_i[n]
  output logic      sat_dead,   // non-live because of saturation/recovery
  output logic      inj_dead    // non-live because of an injected episode
);

  logic [LEN_W-1:0] remain_q;   // non-live samples still to come
  logic             cause_q;    // 1: current interval started by saturation
  logic [31:0]      rng_q;

  logic             sat, onset, busy_cnt;
  logic [LEN_W-1:0] rem_dec, draw_len, remain_d;
  logic [LEN_W+1:0] len_calc;

  always_comb begin
    sat      = (adc >= cfg.sat_level);
    busy_cnt = (remain_q != '0);
    rem_dec  = busy_cnt ? remain_q - 1'b1 : '0;
    onset    = !sat && !busy_cnt && ext_live && (rng_q[31:16] < cfg.p_dead);
    // Episode length including the current sample.
    if (cfg.dead_mode == DEAD_DISTRIBUTED)
      len_calc = {2'b0, cfg.dead_len} + (LEN_W+2)'(rng_q[7:0] & cfg.dead_spread)
               - (LEN_W+2)'(cfg.dead_spread >> 1);
    else
      len_calc = {2'b0, cfg.dead_len};
    if (len_calc[LEN_W+1])           draw_len = 10'd1;   // went negative
    else if (len_calc[LEN_W])        draw_len = '1;
    else if (len_calc == '0)         draw_len = 10'd1;
    else                             draw_len = len_calc[LEN_W-1:0];

    remain_d = rem_dec;
    if (sat && cfg.sat_recovery > rem_dec) remain_d = cfg.sat_recovery;
    if (onset)                             remain_d = draw_len - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain_q <= '0;
      cause_q  <= 1'b0;
      rng_q    <= SEED;
      live     <= 1'b1;
      sat_dead <= 1'b0;
      inj_dead <= 1'b0;
    end else if (en) begin
      remain_q <= remain_d;
      rng_q    <= xorshift32(rng_q);
      if (sat)        cause_q <= 1'b1;
      else if (onset) cause_q <= 1'b0;
      live     <= ext_live && !sat && !busy_cnt && !onset;
      sat_dead <= sat || (busy_cnt && cause_q);
      inj_dead <= onset || (busy_cnt && !cause_q && !sat);
    end
  end

endmodule
