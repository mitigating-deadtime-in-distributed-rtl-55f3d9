// lat_pkg -- shared constants, fixed-point formats and configuration types of
// the liveness-aware trigger.
//
// The sample stream runs at one sample per enabled clock (60 MSPS in the
// reference configuration, Delta-t = 16.7 ns). Quantities that follow the
// published configuration: 16 channels, 12-bit ADC (0..4095), pedestal of
// about 300 counts, IIR persistence k = 0.90, coherence threshold
// Gamma = 2.659 and a decision window of 1.5 us (90 samples at 60 MSPS).
// Every word width and fixed-point format below is a choice of this design:
//   Psi, Psi_eff  : signed, PSI_W bits, PSI_FRAC fractional bits (units of the
//                   noise sigma, so noise has zero mean and unit deviation)
//   k             : unsigned Q0.16
//   w_i           : unsigned, W_W bits, W_FRAC fractional bits (1.0 = 256)
//   G, Gamma      : unsigned, G_W bits, G_FRAC fractional bits
//   gain norm.    : unsigned Q8.8 factor from ADC counts to Psi units
// A pseudo-random step (xorshift32) is shared by the noise source of the
// pulse synthesiser and the deadtime injector.
// A lint of the package on its own reports most constants as unused
// parameters; that is expected, the modules and testbenches that import the
// package are their users.
package lat_pkg;

  // ---- published sizes -------------------------------------------------
  localparam int unsigned N_CH_DEF     = 16;    // channels N
  localparam int unsigned ADC_W        = 12;    // ADC resolution
  localparam int unsigned WIN_DEF      = 90;    // 1.5 us * 60 MSPS
  localparam int unsigned PED_DEF      = 300;   // pedestal, ADC counts

  // ---- fixed-point formats (design choice) -----------------------------
  localparam int unsigned PSI_W        = 18;
  localparam int unsigned PSI_FRAC     = 8;
  localparam int unsigned K_W          = 16;    // Q0.16
  localparam int unsigned STATE_XFRAC  = 8;     // extra IIR state fraction
  localparam int unsigned W_W          = 10;
  localparam int unsigned W_FRAC       = 8;
  localparam int unsigned G_W          = 32;
  localparam int unsigned G_FRAC       = 8;
  localparam int unsigned GN_W         = 16;    // Q8.8
  localparam int unsigned LEN_W        = 10;    // deadtime lengths, samples

  // k = 0.90 -> round(0.90 * 65536)
  localparam logic [K_W-1:0] K_DEF     = 16'd58982;
  // Gamma = 2.659 -> round(2.659 * 256) = 681 (2.6602)
  localparam logic [G_W-1:0] GAMMA_DEF = 32'd681;
  // weight 1.0
  localparam logic [W_W-1:0] W_ONE     = 10'd256;

  typedef logic signed [PSI_W-1:0] psi_t;
  typedef logic        [ADC_W-1:0] adc_t;
  typedef logic        [G_W-1:0]   g_t;

  // Deadtime recovery model of the stress injector.
  typedef enum logic {
    DEAD_FIXED       = 1'b0,   // every episode lasts dead_len samples
    DEAD_DISTRIBUTED = 1'b1    // dead_len +/- spread, mean dead_len
  } dead_mode_e;

  // Configuration of the liveness monitor (shared by all channels).
  typedef struct packed {
    adc_t              sat_level;    // sample >= sat_level counts as saturated
    logic [LEN_W-1:0]  sat_recovery; // non-live samples after a saturated one
    logic [15:0]       p_dead;       // onset probability = p_dead / 65536
    dead_mode_e        dead_mode;
    logic [LEN_W-1:0]  dead_len;     // fixed length / mean length W
    logic [7:0]        dead_spread;  // mask 2^m-1, length drawn in W +/- m/2
  } live_cfg_t;

  // One xorshift32 step (Marsaglia). Never maps a non-zero value to zero.
  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

endpackage
