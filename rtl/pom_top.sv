`timescale 1ps/1ps
// pom_top -- the POM wire-chamber digitizer: NCH channels and one digital backend.
//
// Each channel digitizes one wire: two TDCs sharing a ring oscillator measure
// the near-end and far-end threshold crossings against the common TDC start, and
// an 8-bit pipeline ADC records 2 samples before and 8 after the near-end
// crossing.  The backend takes commands on `rxin`, arms the channels, declares
// an event at the first near-end hit, and sends one 120-bit packet per channel
// on `txout` (with `txdr` marking packet bits), then halts until re-armed.
// The preamplifiers, receiver buffers, LVDS pads and input switches are analog
// and not part of this RTL: their output voltages enter as ports (integers in
// microvolts), the preamplifier settings held in the configuration registers
// leave as ports, and FADO/FETDC are single wires.
// Clock: `clk` is the 50 MHz operation clock of ADC and backend; the TDCs run
// from their own ring oscillators and from `tdc_start_n`.
module pom_top #(
  parameter int unsigned NCH = pom_pkg::NCH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               rxin,
  output logic               txout,
  output logic               txdr,
  input  logic               tdc_start_n,
  input  pom_pkg::uv_t       pre_near   [NCH],
  input  pom_pkg::uv_t       pre_far    [NCH],
  input  pom_pkg::uv_t       ext        [NCH],
  input  pom_pkg::uv_t       adc_test_v [NCH],
  input  pom_pkg::uv_t       vth_near   [NCH],
  input  pom_pkg::uv_t       vth_far    [NCH],
  input  logic [1:0]         test_stop  [NCH],
  input  logic [NCH-1:0]     fetdc,
  output logic [NCH-1:0]     fado,
  output logic [1:0]         pre_rf_sel [NCH],
  output logic [3:0]         pre_pz_sel [NCH]
);
  import pom_pkg::*;

  chan_cfg_t  cfg      [NCH];
  logic [NCH-1:0] near_stop, fifo_done;
  tdc_word_t  tdc_time [NCH][2];
  logic [1:0] tdc_hit  [NCH];
  adc_code_t  samples  [NCH][ADC_NSAMP];
  logic       fifo_arm, fifo_trig;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    pom_channel u_ch (
      .clk         (clk),
      .rst_n       (rst_n),
      .cfg         (cfg[c]),
      .tdc_start_n (tdc_start_n),
      .pre_near    (pre_near[c]),
      .pre_far     (pre_far[c]),
      .ext         (ext[c]),
      .adc_test_v  (adc_test_v[c]),
      .vth_near    (vth_near[c]),
      .vth_far     (vth_far[c]),
      .test_stop   (test_stop[c]),
      .fetdc       (fetdc[c]),
      .fado        (fado[c]),
      .fifo_arm    (fifo_arm),
      .fifo_trig   (fifo_trig),
      .near_stop   (near_stop[c]),
      .tdc_time    (tdc_time[c]),
      .tdc_hit     (tdc_hit[c]),
      .samples     (samples[c]),
      .fifo_done   (fifo_done[c])
    );
    assign pre_rf_sel[c] = cfg[c].rf_sel;
    assign pre_pz_sel[c] = cfg[c].pz_sel;
  end

  pom_backend #(.NCH(NCH)) u_be (
    .clk       (clk),
    .rst_n     (rst_n),
    .rxin      (rxin),
    .near_stop (near_stop),
    .tdc_hit   (tdc_hit),
    .tdc_time  (tdc_time),
    .samples   (samples),
    .fifo_done (fifo_done),
    .cfg       (cfg),
    .fifo_arm  (fifo_arm),
    .fifo_trig (fifo_trig),
    .txout     (txout),
    .txdr      (txdr)
  );

endmodule
