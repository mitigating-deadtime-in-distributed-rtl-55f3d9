// lat_trigger_top -- liveness-aware trigger for a distributed optical array.
//
// N channels are processed side by side; each is one node of the array:
//
//   hits --> pulse_synth --+
//                          +--(src_sel)--> psi_normalize ---> iir_observable
//   adc_in --> register ---+          \--> liveness_monitor --/     |
//                                                                   v
//                                       channel_align (per channel delay)
//                                                                   |
//            trigger_decision <--- coherence_score <----------------+
//
// Node level (per channel): the sample source is either the on-chip
// PMT/digitizer emulator driven by hit strobes (src_sel = 0) or digitized
// waveforms from outside (src_sel = 1). The chosen 12-bit stream feeds the
// normalizer (Psi) and the liveness monitor (L) in parallel; the IIR stage
// combines them into the continuity-preserving observable Psi_eff, which
// decays instead of collapsing while L = 0.
// Network level: per-channel alignment delays, the energy-like coherence
// score G[n] = sum w_i Psi_eff_i^2 and the windowed threshold decision.
//
// Timing: at most one sample per clock with en = 1. in_valid marks real
// samples and travels with the data; each stage advances only when a valid
// sample reaches it, so stream gaps hold all state (IIR memory, deadtime
// counters, delay lines). Configuration inputs are quasi-static: change them
// while the pipeline is drained. With a continuous stream, the G of a sample
// appears 7 clocks after the sample is presented on adc_in/hit: 1 (input)
// + 1 (normalize/liveness) + 1 (IIR) + 1 (align) + 3 (score); the decision
// outputs follow one clock later. Channel i's contribution is additionally
// delayed by dly_i samples.
//
// Follows the paper's pipeline (input, pulse synthesis, liveness, recursive
// IIR, alignment and coherence, decision) and its reference sizes: N = 16,
// WIN = 90 samples, k and Gamma are inputs with package defaults 0.90 and
// 2.659. Own choices: the input select, the register placement and all word
// formats (see lat_pkg).
module lat_trigger_top
  import lat_pkg::*;
#(
  parameter int unsigned N       = N_CH_DEF,
  parameter int unsigned WIN     = WIN_DEF,
  parameter int unsigned MAX_DLY = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic                       in_valid,
  input  logic                       src_sel,        // 0: hits, 1: adc_in
  // node inputs
  input  logic                       hit      [N],
  input  logic [7:0]                 npe      [N],
  input  adc_t                       adc_in   [N],
  input  logic                       ext_live [N],
  // per-channel configuration
  input  logic [15:0]                amp_pe   [N],   // emulator gain, Q8.8
  input  adc_t                       pedestal [N],
  input  logic [GN_W-1:0]            gnorm    [N],   // Q8.8
  input  logic [W_W-1:0]             weight   [N],
  input  logic [$clog2(MAX_DLY)-1:0] dly      [N],
  // shared configuration
  input  logic                       noise_en,
  input  logic [1:0]                 noise_shift [N],  // per-channel noise scale
  input  live_cfg_t                  live_cfg,
  input  logic [K_W-1:0]             k,
  input  g_t                         gamma,
  // node observables
  output logic                       live     [N],
  output psi_t                       psi      [N],
  output psi_t                       psi_eff  [N],
  output logic                       sat_dead [N],
  output logic                       inj_dead [N],
  // network level
  output g_t                         g,
  output logic                       g_valid,
  output logic                       over,
  output logic                       trig_sliding,
  output logic                       win_done,
  output logic                       win_trig,
  output g_t                         win_max
);

  adc_t synth_adc [N];
  adc_t ext_adc_q [N];
  logic ext_live_q [N];
  adc_t sel_adc   [N];
  psi_t aligned   [N];
  logic [3:0] v_q;   // valid through input, normalize, IIR, align

  // A stage advances only when a valid sample reaches it, so gaps in the
  // stream (in_valid = 0) neither feed the IIR nor age the deadtime counters.
  logic en_in, en_node, en_iir, en_align;
  assign en_in    = en && in_valid;
  assign en_node  = en && v_q[0];
  assign en_iir   = en && v_q[1];
  assign en_align = en && v_q[2];

  for (genvar i = 0; i < N; i++) begin : g_node
    pulse_synth #(
      .SEED(32'h1234_5678 ^ (32'(i) * 32'h9E37_79B9))
    ) u_synth (
      .clk, .rst_n, .en(en_in),
      .hit(hit[i]), .npe(npe[i]), .amp_pe(amp_pe[i]),
      .pedestal(pedestal[i]), .noise_en, .noise_shift(noise_shift[i]),
      .adc(synth_adc[i])
    );

    // Input register: a sample and its busy flag stay together.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ext_adc_q[i]  <= '0;
        ext_live_q[i] <= 1'b1;
      end else if (en_in) begin
        ext_adc_q[i]  <= adc_in[i];
        ext_live_q[i] <= ext_live[i];
      end
    end

    assign sel_adc[i] = src_sel ? ext_adc_q[i] : synth_adc[i];

    psi_normalize u_norm (
      .clk, .rst_n, .en(en_node),
      .adc(sel_adc[i]), .pedestal(pedestal[i]), .gnorm(gnorm[i]),
      .psi(psi[i])
    );

    liveness_monitor #(
      .SEED(32'h0BAD_5EED ^ (32'(i + 1) * 32'h85EB_CA6B))
    ) u_live (
      .clk, .rst_n, .en(en_node),
      .adc(sel_adc[i]), .ext_live(ext_live_q[i]), .cfg(live_cfg),
      .live(live[i]), .sat_dead(sat_dead[i]), .inj_dead(inj_dead[i])
    );

    iir_observable u_iir (
      .clk, .rst_n, .en(en_iir),
      .psi(psi[i]), .live(live[i]), .k,
      .psi_eff(psi_eff[i])
    );

    channel_align #(.MAX_DLY(MAX_DLY)) u_align (
      .clk, .rst_n, .en(en_align),
      .din(psi_eff[i]), .dly(dly[i]),
      .dout(aligned[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  v_q <= '0;
    else if (en) v_q <= {v_q[2:0], in_valid};
  end

  coherence_score #(.N(N)) u_score (
    .clk, .rst_n, .en,
    .valid_in(v_q[3]), .psi_eff(aligned), .w(weight),
    .g, .valid_out(g_valid)
  );

  trigger_decision #(.WIN(WIN)) u_dec (
    .clk, .rst_n, .en,
    .valid(g_valid), .g, .gamma,
    .over, .trig_sliding, .win_done, .win_trig, .win_max
  );

endmodule
