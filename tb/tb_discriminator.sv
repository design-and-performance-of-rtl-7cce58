`timescale 1ps/1ps
// tb_discriminator -- output high exactly while the input is above threshold;
// random voltages and thresholds plus a shaped pulse crossing a threshold.
module tb_discriminator;
  import pom_pkg::*;
  uv_t  vin, vth;
  logic out;
  int checks = 0, failures = 0;
  int rises = 0;
  logic prev = 1'b0;

  discriminator dut (.vin(vin), .vth(vth), .out(out));

  initial begin
    repeat (500) begin
      int a, b;
      a = int'($urandom_range(0, 400_000)) - 200_000;
      b = int'($urandom_range(0, 100_000)) - 50_000;
      vin = uv_t'(a); vth = uv_t'(b);
      #10;
      checks++; if (out !== (a > b)) failures++;
    end
    // fine sweep through the threshold, 100 uV steps
    for (int b = -3; b <= 3; b++) begin
      vth = uv_t'(b * 7_000);
      for (int a = -50; a <= 50; a++) begin
        vin = uv_t'(b * 7_000 + a * 100);
        #10;
        checks++; if (out !== (a > 0)) failures++;
      end
    end
    vth = uv_t'(5_000);
    for (int t = 0; t < 200; t++) begin          // rising then falling pulse
      vin = uv_t'((t < 20) ? t * 1000 : 20_000 - (t - 20) * 100);
      #10;
      if (out && !prev) rises++;
      prev = out;
    end
    checks++; if (rises != 1) failures++;
    vin = uv_t'(5_000); #10; checks++; if (out !== 1'b0) failures++;  // at threshold: low
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
