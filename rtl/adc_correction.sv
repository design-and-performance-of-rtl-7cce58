`timescale 1ps/1ps
// adc_correction -- digital error correction of the 1.5-bit pipeline ADC.
//
// Each stage delivers a code d in {0,1,2} one clock after the stage before it.
// Stage i's code (i = 0 for the first stage) is delayed STAGES-1-i clocks so that
// the codes of one input sample line up, and the aligned codes are added with
// one bit of overlap:
//   code = 1 + sum_i d_i * 2^(STAGES-1-i)      (range 1 .. 2^BITS - 1)
// which equals mid-scale plus the signed sum of (d_i - 1) weights.  The overlap
// lets a comparator error in one stage be absorbed by the stages after it.
// The result is registered, so a sample taken by the first stage at clock edge s
// appears on `code` after edge s + STAGES.
// The paper states that the two bits of each stage are combined in combinational
// logic using effectively 1.5 bits; the alignment registers and the adder form
// are the standard way of doing so and are this design's.
module adc_correction #(
  parameter int unsigned STAGES = 7,
  parameter int unsigned BITS   = 8
) (
  input  logic            clk,
  input  logic [1:0]      d [STAGES],
  output logic [BITS-1:0] code
);

  // dly[i][k]: code of stage i delayed by k+1 clocks
  logic [1:0] dly [STAGES][STAGES];
  logic [1:0] aligned [STAGES];

  always_ff @(posedge clk) begin
    for (int i = 0; i < STAGES; i++) begin
      dly[i][0] <= d[i];
      for (int k = 1; k < STAGES; k++) dly[i][k] <= dly[i][k-1];
    end
  end

  always_comb begin
    for (int i = 0; i < STAGES; i++)
      aligned[i] = (i == STAGES-1) ? d[i] : dly[i][STAGES-2-i];
  end

  always_ff @(posedge clk) begin
    logic [BITS:0] sum;
    sum = (BITS+1)'(1);
    for (int i = 0; i < STAGES; i++)
      sum = sum + ((BITS+1)'(aligned[i]) << (STAGES-1-i));
    code <= (sum > (BITS+1)'((1 << BITS) - 1)) ? '1 : sum[BITS-1:0];
  end

endmodule
