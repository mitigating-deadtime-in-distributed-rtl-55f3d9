// pulse_synth -- digital emulator of one optical-module channel (PMT plus
// 12-bit digitizer), producing the ADC sample stream from hit strobes.
//
// The single-photoelectron response is the difference of two exponentials,
// V(t) ~ exp(-t/tau_d) - exp(-t/tau_r). Sampled, each exponential is a
// geometric sequence, so the shape is produced by two first-order recursions
// that receive the same charge at a hit:
//     A_d[n] = KD * A_d[n-1] + q[n],   A_r[n] = KR * A_r[n-1] + q[n]
//     V[n]   = A_d[n] - A_r[n]         (0 at the hit sample, then rises/decays)
// with KD = exp(-dt/tau_d), KR = exp(-dt/tau_r) in Q0.16 and
// q[n] = npe * amp_pe (ADC counts, Q.8). amp_pe carries the channel gain, so
// channel-to-channel gain spread is set per instance. The sample is
//     adc[n] = clip(pedestal + floor(V[n]) + noise[n], 0, 4095)
// The clip is the hard ADC ceiling; the liveness monitor turns it into a
// recovery interval. noise[n] is a triangular pseudo-random value in
// [-15, 15] counts (two 4-bit fields of an xorshift32 generator), shifted
// right by noise_shift and enabled by noise_en.
//
// Timing: on a clock with en = 1 the sample belonging to that hit/npe input
// appears on adc one clock later (registered output). With en = 0 all state
// holds.
//
// Follows the paper: difference-of-exponentials SPE shape, per-channel gain,
// baseline noise, pedestal, 12-bit clipping. Own choices: the recursive
// generation of the shape, the Q formats, the default time constants
// (tau_r = 5 ns, tau_d = 30 ns at 60 MSPS) and the noise generator.
module pulse_synth
  import lat_pkg::*;
#(
  parameter logic [15:0] KD   = 16'd37604,     // exp(-16.67/30)
  parameter logic [15:0] KR   = 16'd2338,      // exp(-16.67/5)
  parameter logic [31:0] SEED = 32'h1234_5678  // non-zero
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        hit,          // photoelectrons arrive in this sample
  input  logic [7:0]  npe,          // number of photoelectrons
  input  logic [15:0] amp_pe,       // charge per PE in ADC counts, Q8.8
  input  adc_t        pedestal,
  input  logic        noise_en,
  input  logic [1:0]  noise_shift,
  output adc_t        adc
);

  localparam int unsigned ACC_W = 26;          // Q18.8 counts
  localparam logic [ACC_W-1:0] ACC_MAX = '1;

  logic [ACC_W-1:0] ad_q, ar_q, ad_d, ar_d;
  logic [31:0]      rng_q;

  // One decay-plus-inject step, saturating.
  function automatic logic [ACC_W-1:0] step(input logic [ACC_W-1:0] a,
                                            input logic [15:0]      kk,
                                            input logic [23:0]      q);
    logic [ACC_W-1:0] decayed;
    logic [ACC_W:0]   sum;
    decayed = ACC_W'(({16'b0, a} * {{ACC_W{1'b0}}, kk}) >> 16);
    sum     = {1'b0, decayed} + (ACC_W+1)'(q);
    return sum[ACC_W] ? ACC_MAX : sum[ACC_W-1:0];
  endfunction

  logic [23:0] q;
  always_comb q = hit ? npe * amp_pe : 24'd0;

  always_comb begin
    ad_d = step(ad_q, KD, q);
    ar_d = step(ar_q, KR, q);
  end

  // Sample value before clipping, in whole counts.
  logic signed [ACC_W:0] v_cnt;
  logic signed [5:0]     noise;
  logic signed [ACC_W+1:0] raw;
  always_comb begin
    v_cnt = (ad_d >= ar_d) ? signed'({1'b0, ad_d - ar_d}) >>> 8 : '0;
    noise = signed'(6'({2'b0, rng_q[3:0]} + {2'b0, rng_q[7:4]})) - 6'sd15;
    noise = noise >>> noise_shift;
    raw   = (ACC_W+2)'(signed'({1'b0, pedestal})) + (ACC_W+2)'(v_cnt)
          + (noise_en ? (ACC_W+2)'(noise) : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ad_q  <= '0;
      ar_q  <= '0;
      rng_q <= SEED;
      adc   <= '0;
    end else if (en) begin
      ad_q  <= ad_d;
      ar_q  <= ar_d;
      rng_q <= xorshift32(rng_q);
      if (raw < 0)                   adc <= '0;
      else if (raw > (2**ADC_W - 1)) adc <= '1;
      else                           adc <= raw[ADC_W-1:0];
    end
  end

endmodule
