`timescale 1ps/1ps
// pom_pkg -- types and constants shared by the POM digitizer RTL.
//
// Analog quantities (preamplifier outputs, discriminator thresholds, ADC input)
// are carried between the behavioural models as signed integers in microvolts
// (uv_t).  The ADC is an 8-bit converter with a 1 mV LSB, so its differential
// full scale is +-128 mV around mid-code.  A TDC word is 16 bits: an 11-bit
// ring-loop count above a 5-bit ring phase.  Widths, sample counts and the
// channel count follow the paper; the configuration layout, command opcodes
// and packet header are this design's own choices.
package pom_pkg;

  // ---- channel count and converter sizes -----------------------------------
  localparam int unsigned NCH        = 4;   // channels per chip
  localparam int unsigned TDC_W      = 16;  // TDC word
  localparam int unsigned TDC_CNT_W  = 11;  // MSB (loop) counter
  localparam int unsigned TDC_FINE_W = 5;   // ring phase, 32 phases
  localparam int unsigned RING_STAGES = 16; // differential ring stages
  localparam int unsigned ADC_BITS   = 8;
  localparam int unsigned ADC_STAGES = 7;   // 1.5-bit pipeline stages
  localparam int unsigned ADC_PRE    = 2;   // samples kept before the trigger
  localparam int unsigned ADC_POST   = 8;   // samples kept from the trigger on
  localparam int unsigned ADC_NSAMP  = ADC_PRE + ADC_POST;
  localparam int unsigned ADC_LAT    = ADC_STAGES;     // clocks, input to code

  // ---- analog values ----------------------------------------------------------
  typedef logic signed [23:0] uv_t;          // microvolts
  localparam int ADC_VREF_UV = 128_000;      // half of the 256 mV full scale

  typedef logic [TDC_W-1:0]    tdc_word_t;
  typedef logic [ADC_BITS-1:0] adc_code_t;
  typedef adc_code_t           adc_samples_t [ADC_NSAMP];

  // ---- per-channel configuration (held in triple-redundant registers) -------
  typedef struct packed {
    logic       en;        // channel takes part in events
    logic       adc_test;  // ADC converts the test voltage instead of the MUX
    logic       tdc_test;  // TDC stops come from the test inputs
    logic       far_ext;   // far-end MUX: 1 = EXT, 0 = far PRE
    logic       near_ext;  // near-end MUX: 1 = EXT, 0 = near PRE
    logic       spare;
    logic [3:0] pz_sel;    // pole-zero network setting (R_PZ), preamplifier
    logic [1:0] rf_sel;    // feedback resistor setting (R_F), preamplifier
  } chan_cfg_t;
  localparam int unsigned CFG_W = $bits(chan_cfg_t);  // 12

  // ---- command frames from the DAQ ---------------------------------------------
  // A frame is a start bit '1' and 16 bits, MSB first: {op[3:0], arg[11:0]}.
  typedef enum logic [3:0] {
    OP_NOP    = 4'h0,
    OP_WRCFG0 = 4'h1,  // write channel 0 configuration (arg = chan_cfg_t)
    OP_WRCFG1 = 4'h2,
    OP_WRCFG2 = 4'h3,
    OP_WRCFG3 = 4'h4,
    OP_ARM    = 4'h8,  // start looking for an event
    OP_DISARM = 4'h9   // return to idle
  } op_e;
  localparam int unsigned CMD_W = 16;

  // ---- event packet --------------------------------------------------------------
  // Per channel: {4'hA, ch[1:0], hit0, hit1}, TDC0, TDC1, ADC sample 0..9.
  localparam logic [3:0]  PKT_MARK  = 4'hA;
  localparam int unsigned PKT_CH_W  = 8 + 2*TDC_W + ADC_NSAMP*ADC_BITS; // 120

endpackage
