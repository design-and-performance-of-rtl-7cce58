`timescale 1ps/1ps
// tdc -- the dual 16-bit time-to-digital converter of one POM channel.
//
// One ring oscillator and one loop counter are shared by two hit-register banks:
// bank 0 is stopped by the near-end discriminator (STOP1), bank 1 by the far-end
// signal (STOP2).  Both measure from the same rising edge of start_n (the common
// TDC reset), so their difference cancels the oscillator's start-up phase.
// Each result is {11-bit loop count, 5-bit ring phase}; one LSB is one ring stage
// delay (37 ps), full range 2^16 LSBs (about 2.4 us).
// Structure and sizes follow the paper's TDC block diagram; the ring is a
// behavioural model, and the counter clock phase and re-timing rule are this
// design's (see tdc_counter and tdc_hit_register).
module tdc #(
  parameter int unsigned STAGE_DELAY_PS = 37
) (
  input  logic                   start_n,
  input  logic [1:0]             stop,
  output pom_pkg::tdc_word_t     time_o [2],
  output logic [1:0]             hit
);
  import pom_pkg::*;

  logic [RING_STAGES-1:0] phase;
  logic [TDC_CNT_W-1:0]   count;

  ring_osc #(.STAGES(RING_STAGES), .STAGE_DELAY_PS(STAGE_DELAY_PS)) u_ring (
    .start_n (start_n),
    .phase   (phase)
  );

  // Counts on the complement of the last stage: its rising edge is the 31 -> 0 wrap.
  tdc_counter #(.WIDTH(TDC_CNT_W)) u_cnt (
    .clk_ring (~phase[RING_STAGES-1]),
    .start_n  (start_n),
    .count    (count)
  );

  for (genvar b = 0; b < 2; b++) begin : g_bank
    tdc_hit_register #(.STAGES(RING_STAGES), .CNT_W(TDC_CNT_W), .FINE_W(TDC_FINE_W)) u_hit (
      .start_n (start_n),
      .stop    (stop[b]),
      .phase   (phase),
      .count   (count),
      .time_o  (time_o[b]),
      .hit     (hit[b])
    );
  end

endmodule
