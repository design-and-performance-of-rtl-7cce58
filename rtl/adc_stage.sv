`timescale 1ps/1ps
// adc_stage -- BEHAVIOURAL MODEL of one 1.5-bit pipeline ADC stage.
//
// In silicon the stage is switched-capacitor circuitry: a sample-and-hold (SHA),
// a two-comparator sub-ADC (ADSC), a 3-level sub-DAC (DASC), a subtractor and an
// interstage amplifier of gain 2.  Here voltages are signed integers in
// microvolts and the stage computes, on each rising clock edge,
//   d = 2 if vin > +VREF/4,  0 if vin < -VREF/4,  1 otherwise
//   vout = 2*vin - (d-1)*VREF, limited to +-VREF (amplifier saturation).
// Code and residue are registered together, so a stage adds one clock of latency.
// The block structure and the gain of 2 are the paper's; the decision levels are
// the textbook ones for a 1.5-bit stage, and the one-clock-per-stage timing and
// the saturation limit are this design's.  Comparator offsets and capacitor
// mismatch are not modelled.
module adc_stage #(
  parameter int VREF_UV = pom_pkg::ADC_VREF_UV
) (
  input  logic         clk,
  input  pom_pkg::uv_t vin,
  output logic [1:0]   d,
  output pom_pkg::uv_t vout
);
  import pom_pkg::*;

  logic [1:0] d_n;
  int         res;

  always_comb begin
    if (int'(vin) > VREF_UV/4) begin
      d_n = 2'd2;
      res = 2*int'(vin) - VREF_UV;
    end else if (int'(vin) < -VREF_UV/4) begin
      d_n = 2'd0;
      res = 2*int'(vin) + VREF_UV;
    end else begin
      d_n = 2'd1;
      res = 2*int'(vin);
    end
    if (res >  VREF_UV) res =  VREF_UV;
    if (res < -VREF_UV) res = -VREF_UV;
  end

  always_ff @(posedge clk) begin
    d    <= d_n;
    vout <= uv_t'(res);
  end

endmodule
