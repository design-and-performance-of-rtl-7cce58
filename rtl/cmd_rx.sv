`timescale 1ps/1ps
// cmd_rx -- receiver for command frames from the DAQ.
//
// The command line idles low.  A frame is a start bit '1' followed by FRAME data
// bits, most significant first, one bit per rising clock edge.  After the last
// bit the word appears on `cmd` with `cmd_valid` high for one clock; the next
// frame may start on the following clock.  The paper says only that the backend
// responds to commands from the off-chip DAQ; the line, frame and timing here are
// this design's.
module cmd_rx #(
  parameter int unsigned FRAME = pom_pkg::CMD_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rxin,
  output logic             cmd_valid,
  output logic [FRAME-1:0] cmd
);

  localparam int unsigned CNT_W = $clog2(FRAME + 1);

  logic             busy;
  logic [CNT_W-1:0] left;
  logic [FRAME-2:0] sh;   // bits received so far

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      left      <= '0;
      sh        <= '0;
      cmd       <= '0;
      cmd_valid <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      if (!busy) begin
        if (rxin) begin
          busy <= 1'b1;
          left <= CNT_W'(FRAME);
        end
      end else begin
        sh   <= {sh[FRAME-3:0], rxin};
        left <= left - 1'b1;
        if (left == CNT_W'(1)) begin
          busy      <= 1'b0;
          cmd       <= {sh[FRAME-2:0], rxin};
          cmd_valid <= 1'b1;
        end
      end
    end
  end

endmodule
