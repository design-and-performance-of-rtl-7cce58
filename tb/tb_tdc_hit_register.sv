`timescale 1ps/1ps
// tb_tdc_hit_register -- drives one hit-register bank with an ideal ring code and
// loop count generated here from elapsed time (step T every 37 ps: twisted-ring
// pattern of T mod 32, count T / 32), stops it half a step after step T and
// expects time_o == T mod 2^16.  Covers both halves of the loop (the counter
// correction), stops next to the loop wrap and the middle, the 2^16 wrap, and that
// a second stop does not change a recorded value.
module tb_tdc_hit_register;
  localparam int D = 37;
  logic        start_n = 1'b1, stop = 1'b0;
  logic [15:0] phase = '0;
  logic [10:0] count = '0;
  logic [15:0] time_o;
  logic        hit;
  int checks = 0, failures = 0;
  int T;

  tdc_hit_register #(.STAGES(16), .CNT_W(11), .FINE_W(5)) dut (
    .start_n(start_n), .stop(stop), .phase(phase), .count(count), .time_o(time_o), .hit(hit));

  function automatic logic [15:0] ring_at(int t);
    logic [15:0] e;
    for (int j = 0; j < 16; j++) e[j] = (t > j) && (((t - j - 1) % 32) < 16);
    return e;
  endfunction

  // ideal ring and counter
  always begin
    @(posedge start_n);
    T = 0; phase = ring_at(0); count = '0;
    while (start_n) begin
      #D;
      if (!start_n) break;
      T++;
      phase = ring_at(T);
      count = 11'(T / 32);
    end
    phase = '0; count = '0;
  end

  task automatic measure(int target, bit double_stop);
    start_n = 1'b0;
    #100;
    start_n = 1'b1;
    #(target * D + D/2);
    stop = 1'b1;
    #(D/2) stop = 1'b0;
    if (double_stop) begin #(5*D) stop = 1'b1; #D stop = 1'b0; end
    #(40 * D);
    checks++;
    if (!hit || time_o !== 16'(target)) begin
      failures++;
      $display("target %0d: hit %0b time %0d", target, hit, time_o);
    end
  endtask

  initial begin
    #50;
    checks++; if (hit !== 1'b0) failures++;
    for (int k = 0; k < 40; k++) measure(k, 0);          // first loop, both halves
    measure(15, 0); measure(16, 0); measure(31, 0); measure(32, 0);
    measure(1000, 1); measure(1023, 0); measure(1040, 1);
    for (int k = 0; k < 12; k++) measure(int'($urandom_range(0, 65535)), k[0]);
    measure(65535, 0);
    measure(65536 + 20, 0);                               // counter wrapped
    // no stop: no hit
    start_n = 1'b0; #100; start_n = 1'b1; #(100*D);
    checks++; if (hit !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
