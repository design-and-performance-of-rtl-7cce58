`timescale 1ps/1ps
// tb_tdc_counter -- counts clock edges and compares with an independent count,
// checks the asynchronous clear and the wrap at 2^11.
module tb_tdc_counter;
  logic        clk = 1'b0, start_n = 1'b0;
  logic [10:0] count;
  int checks = 0, failures = 0;
  int n;

  tdc_counter #(.WIDTH(11)) dut (.clk_ring(clk), .start_n(start_n), .count(count));

  task automatic pulse();
    #5 clk = 1'b1; #5 clk = 1'b0;
  endtask

  initial begin
    pulse(); pulse();
    checks++; if (count !== 0) failures++;      // held in clear
    start_n = 1'b1;
    n = 0;
    for (int i = 0; i < 2100; i++) begin
      pulse(); n++;
      checks++;
      if (count !== 11'(n)) begin
        failures++;
        if (failures < 10) $display("edge %0d count %0d", n, count);
      end
    end
    #3 start_n = 1'b0; #1;
    checks++; if (count !== 0) failures++;     // asynchronous clear
    start_n = 1'b1;
    repeat (5) pulse();
    checks++; if (count !== 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
