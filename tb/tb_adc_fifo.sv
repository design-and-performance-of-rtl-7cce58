`timescale 1ps/1ps
// tb_adc_fifo -- the code stream carries its own sample number: the code present
// after edge e is (e - LATENCY) mod 256, as if sample e-LATENCY had just left the
// ADC.  A trigger seen at edge t refers to a crossing at edge x = t-3, and must
// leave samples x-2 .. x+7 in the buffer; done must rise exactly
// POST+LATENCY-3 edges after t, the buffer must then hold
// still, and arm must restart it.
module tb_adc_fifo;
  import pom_pkg::*;
  localparam int LAT = 7, PRE = 2, POST = 8, TD = 3;
  logic      clk = 1'b0, rst_n = 1'b0, arm = 1'b0, trig = 1'b0;
  adc_code_t code = '0;
  adc_code_t samples [PRE+POST];
  logic      done;
  int        e = 0;
  int checks = 0, failures = 0;

  adc_fifo #(.PRE(PRE), .POST(POST), .LATENCY(LAT), .TRIG_DELAY(TD)) dut (
    .clk(clk), .rst_n(rst_n), .arm(arm), .trig(trig), .code(code), .samples(samples), .done(done));

  always #10000 clk = ~clk;
  always @(posedge clk) begin e <= e + 1; code <= 8'(e - LAT); end

  task automatic event_at(int wait_edges);
    int t, waited;
    repeat (wait_edges) @(posedge clk);
    #1 trig = 1'b1;
    @(posedge clk); t = e;          // edge t (e counts edges before this one)
    #1 trig = 1'b0;
    waited = 0;
    while (!done) begin @(posedge clk); #1; waited++; end
    checks++;
    if (waited != POST + LAT - TD) begin failures++; $display("done after %0d edges", waited); end
    for (int k = 0; k < PRE+POST; k++) begin
      checks++;
      if (samples[k] !== 8'(t - TD - PRE + k)) begin
        failures++;
        $display("t=%0d sample %0d = %0d expected %0d", t, k, samples[k], 8'(t - TD - PRE + k));
      end
    end
    repeat (20) @(posedge clk);
    #1;
    checks++; if (!done || samples[0] !== 8'(t - TD - PRE)) failures++;   // frozen
    arm = 1'b1; @(posedge clk); #1 arm = 1'b0;
    @(posedge clk); #1;
    checks++; if (done) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++; if (done) failures++;
    event_at(30);
    event_at(5);
    event_at(123);
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
