`timescale 1ps/1ps
// tb_ring_osc -- checks the ring oscillator model: held at zero while start_n is
// low, then a twisted-ring sequence with one stage change per 37 ps.  The
// expected pattern is computed from elapsed time: stage j is high when
// (T - j - 1) mod 32 < 16 and T > j, with T the whole stage delays since start.
module tb_ring_osc;
  localparam int D = 37;
  logic        start_n = 1'b0;
  logic [15:0] phase;
  int checks = 0, failures = 0;

  ring_osc #(.STAGES(16), .STAGE_DELAY_PS(D)) dut (.start_n(start_n), .phase(phase));

  function automatic logic [15:0] expect_at(int t);
    logic [15:0] e;
    for (int j = 0; j < 16; j++)
      e[j] = (t > j) && (((t - j - 1) % 32) < 16);
    return e;
  endfunction

  initial begin
    #(10 * D);
    checks++; if (phase !== 16'h0) failures++;
    for (int run = 0; run < 3; run++) begin
      start_n = 1'b1;
      for (int t = 0; t < 100 + 37*run; t++) begin
        #(D/2);
        checks++;
        if (phase !== expect_at(t)) begin
          failures++;
          $display("run %0d T=%0d phase=%h expected %h", run, t, phase, expect_at(t));
        end
        #(D - D/2);
      end
      #7 start_n = 1'b0;
      #(3 * D);
      checks++; if (phase !== 16'h0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
