`timescale 1ps/1ps
// ring_osc -- BEHAVIOURAL MODEL (not synthesizable) of the TDC ring oscillator.
//
// The real part is a 16-stage differential ring oscillating near 850 MHz; its
// 16 stage outputs and their complements are the 32 phases that give the TDC
// its 5 least significant bits, and one phase clocks the loop counter.
// The model reproduces only the logic sequence the stages go through: while
// start_n is low every stage is held at 0; from the rising edge of start_n the
// first stage takes the inverse of the last one after one stage delay and every
// later stage follows its predecessor one stage delay later (a twisted ring).
// After start, stage k therefore first rises (k+1) stage delays later and the
// pattern repeats every 2*STAGES stage delays.
//
// The stage count and the 37 ps delay (32 x 37 ps = 1.18 ns, about 850 MHz) are
// the paper's figures.  Holding the ring while start_n is low is this design's
// reading of the inversion bubble on START in the TDC block diagram.  Phase noise,
// supply and temperature dependence are not modelled.  A ring oscillator is a
// closed inverting loop by nature, so a synthesis tool reading this model reports
// a combinational loop through `phase`; that loop is the oscillator itself.
module ring_osc #(
  parameter int unsigned STAGES         = 16,
  parameter int unsigned STAGE_DELAY_PS = 37
) (
  input  logic              start_n,
  output logic [STAGES-1:0] phase
);

  initial phase = '0;

  always begin
    if (!start_n) begin
      phase = '0;
      @(posedge start_n);
    end else begin
      #(STAGE_DELAY_PS);
      if (start_n) phase = {phase[STAGES-2:0], ~phase[STAGES-1]};
      else         phase = '0;
    end
  end

endmodule
