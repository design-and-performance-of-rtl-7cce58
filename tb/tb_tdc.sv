`timescale 1ps/1ps
// tb_tdc -- the complete dual TDC with its ring oscillator.  Each trial releases
// start_n, stops bank 0 half a stage delay after stage T0 and bank 1 after stage
// T1, and expects TDC0 == T0 and TDC1 == T1 (one LSB = 37 ps), with TDC0 - TDC1
// equal to the programmed difference.  Also checks that `hit` rises within one
// ring loop (32 x 37 ps) of the stop plus one loop, and that start_n low clears
// both banks.
module tb_tdc;
  import pom_pkg::*;
  localparam int D = 37;
  logic       start_n = 1'b1;
  logic [1:0] stop = 2'b00;
  tdc_word_t  time_o [2];
  logic [1:0] hit;
  int checks = 0, failures = 0;

  tdc #(.STAGE_DELAY_PS(D)) dut (.start_n(start_n), .stop(stop), .time_o(time_o), .hit(hit));

  task automatic trial(int t0, int t1);
    start_n = 1'b0;
    #200;
    checks++; if (hit !== 2'b00) failures++;
    start_n = 1'b1;
    fork
      begin #(t0 * D + D/2) stop[0] = 1'b1; #(2*D) stop[0] = 1'b0; end
      begin #(t1 * D + D/2) stop[1] = 1'b1; #(2*D) stop[1] = 1'b0; end
    join
    #(64 * D);
    checks++;
    if (hit !== 2'b11 || time_o[0] !== 16'(t0) || time_o[1] !== 16'(t1)) begin
      failures++;
      $display("T0=%0d T1=%0d -> hit %b %0d %0d", t0, t1, hit, time_o[0], time_o[1]);
    end
    checks++;
    if (int'(time_o[0]) - int'(time_o[1]) != t0 - t1) failures++;
  endtask

  initial begin
    #10;
    trial(3, 8);
    trial(15, 16);
    trial(16, 15);
    trial(31, 32);
    trial(500, 495);
    for (int k = 0; k < 6; k++) begin
      int a;
      a = int'($urandom_range(100, 60000));
      trial(a, a + int'($urandom_range(0, 40)) - 20);
    end
    trial(54054, 54059);   // about 2 us
    // hit latency: must be set within two loops of the stop
    start_n = 1'b0; #200; start_n = 1'b1;
    #(100 * D + D/2) stop[0] = 1'b1;
    #(64 * D);
    checks++; if (hit[0] !== 1'b1 || hit[1] !== 1'b0) failures++;
    stop[0] = 1'b0;
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
