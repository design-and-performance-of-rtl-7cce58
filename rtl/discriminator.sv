`timescale 1ps/1ps
// discriminator -- BEHAVIOURAL MODEL of the leading-edge discriminator.
//
// The output is high while the shaped input voltage is above the externally
// supplied threshold (both in microvolts); its rising edge stops a TDC bank and
// triggers the ADC sample buffer.  This is the function the paper gives; the
// comparator circuit, its noise, hysteresis and delay are not modelled.
module discriminator (
  input  pom_pkg::uv_t vin,
  input  pom_pkg::uv_t vth,
  output logic         out
);
  assign out = (vin > vth);
endmodule
