`timescale 1ps/1ps
// tb_adc_stage -- random and edge-case input voltages; the expected stage code
// and residue are computed here from the 1.5-bit stage equations
// (thresholds +-VREF/4, residue 2*vin - (d-1)*VREF, limited to +-VREF).
module tb_adc_stage;
  import pom_pkg::*;
  localparam int VREF = 128_000;
  logic       clk = 1'b0;
  uv_t        vin;
  logic [1:0] d;
  uv_t        vout;
  int checks = 0, failures = 0;

  adc_stage #(.VREF_UV(VREF)) dut (.clk(clk), .vin(vin), .d(d), .vout(vout));

  always #10000 clk = ~clk;

  task automatic apply(int v);
    int ed, er;
    vin = uv_t'(v);
    @(posedge clk); #1;
    ed = (v > VREF/4) ? 2 : (v < -VREF/4) ? 0 : 1;
    er = 2*v - (ed - 1)*VREF;
    if (er > VREF) er = VREF;
    if (er < -VREF) er = -VREF;
    checks++;
    if (int'(d) != ed || int'(vout) != er) begin
      failures++;
      $display("vin %0d: d %0d vout %0d, expected %0d %0d", v, d, vout, ed, er);
    end
  endtask

  initial begin
    apply(0); apply(VREF/4); apply(VREF/4 + 1); apply(-VREF/4); apply(-VREF/4 - 1);
    apply(VREF); apply(-VREF); apply(200_000); apply(-200_000);
    repeat (300) apply(int'($urandom_range(0, 2*VREF)) - VREF);
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
