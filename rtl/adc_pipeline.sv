`timescale 1ps/1ps
// adc_pipeline -- BEHAVIOURAL MODEL of the 8-bit pipeline ADC (analog stages
// modelled in integer microvolts, correction logic synthesizable).
//
// Seven identical 1.5-bit stages (adc_stage) are chained: each converts the
// amplified residue of the one before, so seven samples are in flight at once
// and one code leaves per clock.  adc_correction lines the stage codes up and
// adds them into the output code.  With VREF = 128 mV one LSB is 1 mV and
//   code ~= 128 + vin / 1 mV   (within one LSB; 1..255, saturating).
// Timing: vin is sampled at each rising edge of clk (50 MHz in the paper's
// operation, 65 MS/s maximum) and its code appears STAGES edges later.
// Stage count, 1.5-bit stages, 8 bits and 1 mV LSB are the paper's; the latency
// follows from this design's one-clock-per-stage model.
module adc_pipeline #(
  parameter int unsigned STAGES  = 7,
  parameter int          VREF_UV = pom_pkg::ADC_VREF_UV
) (
  input  logic              clk,
  input  pom_pkg::uv_t      vin,
  output pom_pkg::adc_code_t code
);
  import pom_pkg::*;

  uv_t        v [STAGES+1];
  logic [1:0] d [STAGES];

  assign v[0] = vin;

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    adc_stage #(.VREF_UV(VREF_UV)) u_stage (
      .clk  (clk),
      .vin  (v[i]),
      .d    (d[i]),
      .vout (v[i+1])
    );
  end

  adc_correction #(.STAGES(STAGES), .BITS(ADC_BITS)) u_corr (
    .clk  (clk),
    .d    (d),
    .code (code)
  );

endmodule
