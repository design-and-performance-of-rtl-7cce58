`timescale 1ps/1ps
// tmr_config -- triple-redundant configuration register.
//
// The value is held in three identical registers written together; the output
// is their bitwise two-out-of-three majority, so a single-event upset in any one
// copy does not change what the chip sees.  Write: `we` high at a rising clock
// edge loads `wdata` into all three copies.  Reset (asynchronous, active low)
// clears them.  Triple redundancy of the configuration register is the paper's;
// the width, reset value and the absence of scrubbing are this design's.
module tmr_config #(
  parameter int unsigned WIDTH = pom_pkg::CFG_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] copy_a, copy_b, copy_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      copy_a <= '0;
      copy_b <= '0;
      copy_c <= '0;
    end else if (we) begin
      copy_a <= wdata;
      copy_b <= wdata;
      copy_c <= wdata;
    end
  end

  assign q = (copy_a & copy_b) | (copy_a & copy_c) | (copy_b & copy_c);

endmodule
