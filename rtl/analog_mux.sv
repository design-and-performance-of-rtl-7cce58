`timescale 1ps/1ps
// analog_mux -- BEHAVIOURAL MODEL of the front-end analog multiplexer.
//
// Chooses which shaped signal feeds a discriminator (and, on the near end, the
// ADC): the internal preamplifier output (sel = 0) or the receiver-buffer output
// for an external preamplifier (sel = 1).  Voltages are microvolts.  The
// multiplexer and its two sources are the paper's; the select encoding is this
// design's.
module analog_mux (
  input  logic         sel,
  input  pom_pkg::uv_t pre,
  input  pom_pkg::uv_t ext,
  output pom_pkg::uv_t out
);
  assign out = sel ? ext : pre;
endmodule
