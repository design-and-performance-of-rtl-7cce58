`timescale 1ps/1ps
// tb_cmd_rx -- sends random 16-bit frames (start bit, then MSB first), some
// back to back and some with idle gaps, and checks each word and that cmd_valid
// pulses once, one clock after the last bit.
module tb_cmd_rx;
  logic        clk = 1'b0, rst_n = 1'b0, rxin = 1'b0;
  logic        cmd_valid;
  logic [15:0] cmd;
  int checks = 0, failures = 0;
  int nvalid = 0;

  cmd_rx #(.FRAME(16)) dut (.clk(clk), .rst_n(rst_n), .rxin(rxin), .cmd_valid(cmd_valid), .cmd(cmd));

  always #10000 clk = ~clk;
  always @(posedge clk) if (rst_n && cmd_valid) nvalid++;

  task automatic send(logic [15:0] w, int gap);
    rxin = 1'b1; @(posedge clk); #1;
    for (int i = 15; i >= 0; i--) begin rxin = w[i]; @(posedge clk); #1; end
    rxin = 1'b0;
    checks++; if (!cmd_valid || cmd !== w) begin failures++; $display("sent %h got %h v%b", w, cmd, cmd_valid); end
    repeat (gap) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    send(16'hFFFF, 0);
    send(16'h0000, 3);
    send(16'h8001, 0);
    for (int k = 0; k < 40; k++) send(16'($urandom), k % 3);
    @(posedge clk); #1;
    checks++; if (nvalid != 43) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
