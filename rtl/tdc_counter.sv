`timescale 1ps/1ps
// tdc_counter -- the TDC's MSB counter: a WIDTH-bit synchronous binary counter
// that counts loops of the ring oscillator.
//
// It is clocked by one phase of the ring (the TDC wires it to the complement of
// the last stage, whose rising edge marks the wrap of the 32-phase code from 31
// to 0) and is cleared asynchronously while start_n is low.  With the 5-bit ring
// phase below it the TDC word covers 2^16 LSBs, about 2.4 us at 37 ps.
// The 11-bit width is the paper's; the choice of phase, the asynchronous clear and
// the wrap-around at 2^WIDTH (the paper says nothing of an overflow) are this
// design's.
module tdc_counter #(
  parameter int unsigned WIDTH = 11
) (
  input  logic             clk_ring,
  input  logic             start_n,
  output logic [WIDTH-1:0] count
);

  always_ff @(posedge clk_ring or negedge start_n) begin
    if (!start_n) count <= '0;
    else          count <= count + 1'b1;
  end

endmodule
