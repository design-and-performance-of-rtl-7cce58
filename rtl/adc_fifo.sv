`timescale 1ps/1ps
// adc_fifo -- pre/post-trigger sample buffer behind the ADC.
//
// The ADC converts continuously and every code is shifted into a PRE+POST deep
// buffer.  When `trig` (one clock, already synchronous) is seen at clock edge t,
// the threshold crossing that caused it happened TRIG_DELAY edges earlier (the
// backend's stop catcher, synchroniser and registered trigger take 3 clocks),
// at edge x = t - TRIG_DELAY.  The buffer keeps shifting until it holds the
// samples the ADC took at edges x-PRE .. x+POST-1, then freezes and raises
// `done`.  Because a code leaves the ADC LATENCY edges after its sample was
// taken, that is POST+LATENCY-TRIG_DELAY further edges.  `arm` (one clock)
// releases a frozen buffer; reset leaves it running.
//   samples[0] is the oldest (x-PRE); samples[PRE] is the first sample taken
//   after the crossing.
// The 2 + 8 sample split is the paper's; the shift-register form (the paper says
// only "FIFO memory") and the trigger alignment are this design's.
module adc_fifo #(
  parameter int unsigned PRE     = 2,
  parameter int unsigned POST    = 8,
  parameter int unsigned LATENCY    = pom_pkg::ADC_LAT,
  parameter int unsigned TRIG_DELAY = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                arm,
  input  logic                trig,
  input  pom_pkg::adc_code_t  code,
  output pom_pkg::adc_code_t  samples [PRE+POST],
  output logic                done
);
  import pom_pkg::*;

  localparam int unsigned N     = PRE + POST;
  localparam int unsigned CNT_W = $clog2(POST + LATENCY + 1);

  typedef enum logic [1:0] {S_RUN, S_COUNT, S_DONE} state_e;
  state_e           state;
  logic [CNT_W-1:0] cnt;
  logic             shift;

  assign shift = (state != S_DONE);
  assign done  = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (shift) begin
      for (int i = 0; i < N-1; i++) samples[i] <= samples[i+1];
      samples[N-1] <= code;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_RUN:   if (trig) begin
                   state <= S_COUNT;
                   cnt   <= CNT_W'(POST + LATENCY - TRIG_DELAY);
                 end
        S_COUNT: if (cnt == CNT_W'(1)) state <= S_DONE;
                 else                  cnt   <= cnt - 1'b1;
        S_DONE:  if (arm) state <= S_RUN;
        default: state <= S_RUN;
      endcase
    end
  end

endmodule
