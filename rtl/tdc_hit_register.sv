`timescale 1ps/1ps
// tdc_hit_register -- one bank of the TDC hit register.
//
// At the leading edge of `stop` the bank latches the 16 ring stage outputs (in
// silicon a bank of sense amplifiers).  Latching the loop counter at that same
// instant could catch it mid-transition, so the stop is re-timed first: the
// counter is latched at the next rising edge of the middle stage phase[STAGES-1],
// which occurs half a loop away from the counter's own clock edge.  If the ring
// phase at the stop was in the second half of the loop, the counter has advanced
// once before this re-timed edge, and one is subtracted.  The latched stage
// pattern (a twisted-ring code) is decoded to a binary phase 0..2*STAGES-1.
//
//   time_o = {count_at_stop, phase_at_stop}, valid when `hit` is high.
//
// Only the first stop after start_n rises is recorded; start_n low clears the
// bank.  `hit` rises within one ring loop of the stop.  The two banks per TDC, the
// 5 + 11 bit split and the idea of separate re-synchronised latching signals for
// phase and counter banks are the paper's; this particular re-timing and
// correction rule and the decoder are this design's.  A stop very close to the
// middle of the loop is where a phase/counter disagreement (a 32-count error)
// would show in silicon.
module tdc_hit_register #(
  parameter int unsigned STAGES = 16,
  parameter int unsigned CNT_W  = 11,
  parameter int unsigned FINE_W = 5
) (
  input  logic                    start_n,
  input  logic                    stop,
  input  logic [STAGES-1:0]       phase,
  input  logic [CNT_W-1:0]        count,
  output logic [CNT_W+FINE_W-1:0] time_o,
  output logic                    hit
);

  logic [STAGES-1:0] phase_lat;   // ring state at the stop
  logic              stopped;     // a stop has been seen
  logic [CNT_W-1:0]  count_lat;   // counter at the re-timed stop
  logic [FINE_W-1:0] fine;

  // Fine bank: first stop edge after start.
  always_ff @(posedge stop or negedge start_n) begin
    if (!start_n) begin
      phase_lat <= '0;
      stopped   <= 1'b0;
    end else if (!stopped) begin
      phase_lat <= phase;
      stopped   <= 1'b1;
    end
  end

  // Coarse bank: stop re-timed to the mid-loop phase.
  always_ff @(posedge phase[STAGES-1] or negedge start_n) begin
    if (!start_n) begin
      count_lat <= '0;
      hit       <= 1'b0;
    end else if (stopped && !hit) begin
      count_lat <= count;
      hit       <= 1'b1;
    end
  end

  // Twisted-ring decode: k ones at the bottom -> phase k; after the first stage
  // falls, 2*STAGES minus the number of ones still set at the top.
  function automatic logic [FINE_W-1:0] ring_decode(input logic [STAGES-1:0] s);
    int unsigned ones;
    ones = $countones(s);
    if (s[0])          return FINE_W'(ones);
    else if (ones == 0) return '0;
    else               return FINE_W'(2*STAGES - ones);
  endfunction

  assign fine   = ring_decode(phase_lat);
  assign time_o = {count_lat - CNT_W'(fine[FINE_W-1]), fine};

endmodule
