`timescale 1ps/1ps
// tb_adc_pipeline -- a new random voltage every 20 ns clock (50 MS/s).  The
// code for the sample taken at edge s must appear after edge s+7 and lie within
// one LSB of the ideal 128 + vin/1 mV (clipped to 1..255).  Also a slow ramp
// over the whole range must give a code sequence with no step larger than the
// ramp step and no missing code from 2 to 254.
module tb_adc_pipeline;
  import pom_pkg::*;
  localparam int LAT = 7;
  localparam int N   = 400;
  logic      clk = 1'b0;
  uv_t       vin = '0;
  adc_code_t code;
  int        v_hist [N + 600];
  int checks = 0, failures = 0;
  bit seen [256];
  int prev;

  adc_pipeline #(.STAGES(7), .VREF_UV(128_000)) dut (.clk(clk), .vin(vin), .code(code));

  always #10000 clk = ~clk;

  function automatic int ideal(int v);
    int e;
    e = 128 + ((v >= 0) ? v / 1000 : -((-v + 999) / 1000));   // floor
    if (e < 1) e = 1;
    if (e > 255) e = 255;
    return e;
  endfunction

  initial begin
    for (int s = 0; s < N + LAT; s++) begin
      int v;
      if (s < N) begin
        v = int'($urandom_range(0, 300_000)) - 150_000;
        if (s == 0) v = 200_000;
        if (s == 1) v = -200_000;
        if (s == 2) v = 0;
      end else v = 0;
      v_hist[s] = v;
      vin = uv_t'(v);
      @(posedge clk); #1;                     // sample s taken at this edge
      if (s >= LAT && s - LAT < N) begin
        int e;
        e = ideal(v_hist[s - LAT]);
        checks++;
        if (int'(code) < e - 1 || int'(code) > e + 1) begin
          failures++;
          $display("sample %0d vin %0d code %0d ideal %0d", s-LAT, v_hist[s-LAT], code, e);
        end
      end
    end
    // ramp, 0.5 mV per sample
    prev = -1;
    for (int s = 0; s < 600 + LAT; s++) begin
      vin = uv_t'(-140_000 + 500 * ((s < 600) ? s : 599));
      @(posedge clk); #1;
      if (s >= LAT) begin
        seen[code] = 1'b1;
        if (prev >= 0) begin
          checks++;
          if (int'(code) < prev || int'(code) > prev + 1) failures++;
        end
        prev = int'(code);
      end
    end
    for (int c = 2; c <= 254; c++) begin
      checks++;
      if (!seen[c]) begin failures++; $display("missing code %0d", c); end
    end
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
