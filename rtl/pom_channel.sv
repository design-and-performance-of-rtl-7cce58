`timescale 1ps/1ps
// pom_channel -- one POM channel: the digitization chain for both ends of a wire.
//
// Near end: an analog multiplexer picks the internal preamplifier (NEPA input)
// or the receiver buffer for an external preamplifier (NEXPA input); the chosen
// signal feeds a discriminator, whose leading edge stops TDC bank 0 (TDC0), and
// the pipeline ADC, whose codes run through the pre/post-trigger sample buffer.
// Far end: a second multiplexer picks the far-end preamplifier (FEPA) or the
// receiver buffer; its discriminator output leaves the chip as FADO (an LVDS pair
// in silicon, one wire here).  The far-end timing signal of the same wire comes
// back in on FETDC, possibly from another channel or chip, and stops TDC bank 1
// (TDC1).  With cfg.tdc_test set both banks are stopped by dedicated test inputs
// instead, and with cfg.adc_test the ADC converts a test voltage.
// Analog quantities are integers in microvolts (see pom_pkg).  The block
// structure and signal names follow the paper's top-level diagram; the test-input
// selection through configuration bits is this design's.
module pom_channel (
  input  logic                clk,
  input  logic                rst_n,
  input  pom_pkg::chan_cfg_t  cfg,
  input  logic                tdc_start_n,   // common TDC reset / start
  // analog inputs (outputs of the preamplifiers and receiver buffer)
  input  pom_pkg::uv_t        pre_near,
  input  pom_pkg::uv_t        pre_far,
  input  pom_pkg::uv_t        ext,
  input  pom_pkg::uv_t        adc_test_v,
  input  pom_pkg::uv_t        vth_near,
  input  pom_pkg::uv_t        vth_far,
  // digital timing inputs and outputs
  input  logic [1:0]          test_stop,
  input  logic                fetdc,
  output logic                fado,
  // to and from the backend
  input  logic                fifo_arm,
  input  logic                fifo_trig,
  output logic                near_stop,
  output pom_pkg::tdc_word_t  tdc_time [2],
  output logic [1:0]          tdc_hit,
  output pom_pkg::adc_code_t  samples [pom_pkg::ADC_NSAMP],
  output logic                fifo_done
);
  import pom_pkg::*;

  uv_t                near_v, far_v, adc_v;
  logic               disc_near;
  logic [1:0]         stop;
  adc_code_t          code;

  analog_mux u_mux_near (.sel(cfg.near_ext), .pre(pre_near), .ext(ext), .out(near_v));
  analog_mux u_mux_far  (.sel(cfg.far_ext),  .pre(pre_far),  .ext(ext), .out(far_v));

  discriminator u_disc_near (.vin(near_v), .vth(vth_near), .out(disc_near));
  discriminator u_disc_far  (.vin(far_v),  .vth(vth_far),  .out(fado));

  assign stop      = cfg.tdc_test ? test_stop : {fetdc, disc_near};
  assign near_stop = stop[0];

  tdc u_tdc (
    .start_n (tdc_start_n),
    .stop    (stop),
    .time_o  (tdc_time),
    .hit     (tdc_hit)
  );

  assign adc_v = cfg.adc_test ? adc_test_v : near_v;

  adc_pipeline u_adc (.clk(clk), .vin(adc_v), .code(code));

  adc_fifo #(.PRE(ADC_PRE), .POST(ADC_POST), .LATENCY(ADC_LAT)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .arm     (fifo_arm),
    .trig    (fifo_trig),
    .code    (code),
    .samples (samples),
    .done    (fifo_done)
  );

endmodule
