// psi_normalize -- forms the instantaneous observable Psi_i[n] of one channel
// from its ADC sample: pedestal subtraction followed by gain normalization.
//
//     Psi[n] = sat( (adc[n] - pedestal) * gnorm )
//
// gnorm is an unsigned Q8.8 factor equal to 1 / (noise sigma in ADC counts),
// so that noise in Psi has zero mean and unit standard deviation; the product
// of a whole-count difference and a Q8.8 factor is directly Psi in the
// PSI_FRAC = 8 format. The result saturates to the signed PSI_W range
// (+/-512 sigma).
//
// Timing: one register; Psi for the sample presented with en = 1 appears one
// clock later. Reset clears the output to 0.
//
// Follows the paper: normalized amplitude units after pedestal subtraction
// and gain normalization. Own choices: the formats and the saturation.
module psi_normalize
  import lat_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  adc_t            adc,
  input  adc_t            pedestal,
  input  logic [GN_W-1:0] gnorm,      // Q8.8
  output psi_t            psi
);

  localparam int unsigned P_W = ADC_W + 1 + GN_W + 1;
  localparam logic signed [P_W-1:0] PMAX = P_W'(2**(PSI_W-1) - 1);
  localparam logic signed [P_W-1:0] PMIN = -P_W'(2**(PSI_W-1));

  logic signed [ADC_W:0] diff;
  logic signed [P_W-1:0] prod;
  psi_t                  psi_d;

  always_comb begin
    diff = signed'({1'b0, adc}) - signed'({1'b0, pedestal});
    prod = P_W'(diff) * signed'({1'b0, gnorm});
    if (prod > PMAX)      psi_d = psi_t'(PMAX);
    else if (prod < PMIN) psi_d = psi_t'(PMIN);
    else                  psi_d = psi_t'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  psi <= '0;
    else if (en) psi <= psi_d;
  end

endmodule
