`timescale 1ps/1ps
// tb_pom_channel -- one channel with its TDC, ADC and sample buffer; the backend
// is played by the testbench (it raises fifo_trig after the third clock edge
// following the near-end stop, as the backend's catcher and synchroniser do).
// Run 1, internal preamplifier: a pulse on pre_near crosses the threshold half a
// stage after ring step T0, the far-end return on fetdc half a stage after step
// T1; TDC0 must read T0 and TDC1 T1, and the ten samples must be the ideal ADC
// codes (within 1 LSB) of the voltages present at the 2 clock edges before the
// crossing and the 8 from the first edge after it.  FADO must follow pre_far against vth_far.
// Run 2, external path and test inputs: near_ext routes `ext` to the ADC and
// discriminator, tdc_test stops the TDC from test_stop, adc_test converts a
// constant test voltage.
module tb_pom_channel;
  import pom_pkg::*;
  localparam int D = 37, CLK = 20000;
  logic       clk = 1'b0, rst_n = 1'b0, start_n = 1'b0;
  chan_cfg_t  cfg;
  uv_t        pre_near = '0, pre_far = '0, ext = '0, adc_test_v = '0;
  uv_t        vth_near = uv_t'(20_000), vth_far = uv_t'(20_000);
  logic [1:0] test_stop = 2'b00;
  logic       fetdc = 1'b0, fado;
  logic       fifo_arm = 1'b0, fifo_trig = 1'b0;
  logic       near_stop;
  tdc_word_t  tdc_time [2];
  logic [1:0] tdc_hit;
  adc_code_t  samples [ADC_NSAMP];
  logic       fifo_done;
  int checks = 0, failures = 0;
  int edge_n = 0, trig_edge = -1;
  int vhist [4096];

  pom_channel dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .tdc_start_n(start_n),
    .pre_near(pre_near), .pre_far(pre_far), .ext(ext), .adc_test_v(adc_test_v),
    .vth_near(vth_near), .vth_far(vth_far), .test_stop(test_stop), .fetdc(fetdc), .fado(fado),
    .fifo_arm(fifo_arm), .fifo_trig(fifo_trig), .near_stop(near_stop),
    .tdc_time(tdc_time), .tdc_hit(tdc_hit), .samples(samples), .fifo_done(fifo_done));

  always #(CLK/2) clk = ~clk;

  // record the ADC input voltage at every edge; note the trigger edge
  always @(posedge clk) begin
    vhist[edge_n % 4096] = cfg.adc_test ? int'(adc_test_v) : cfg.near_ext ? int'(ext) : int'(pre_near);
    if (fifo_trig) trig_edge = edge_n;
    edge_n++;
  end

  // the backend's part: trigger two clocks after the near-end stop rises
  always @(posedge near_stop) begin
    @(posedge clk); @(posedge clk); @(posedge clk); #1 fifo_trig = 1'b1;
    @(posedge clk); #1 fifo_trig = 1'b0;
  end

  function automatic int ideal(int v);
    int e;
    e = 128 + ((v >= 0) ? v / 1000 : -((-v + 999) / 1000));
    return (e < 1) ? 1 : (e > 255) ? 255 : e;
  endfunction

  task automatic check_samples();
    wait (fifo_done);
    for (int k = 0; k < ADC_NSAMP; k++) begin
      int e;
      e = ideal(vhist[(trig_edge - 3 - ADC_PRE + k) % 4096]);
      checks++;
      if (int'(samples[k]) < e - 1 || int'(samples[k]) > e + 1) begin
        failures++;
        $display("sample %0d = %0d, ideal %0d", k, samples[k], e);
      end
    end
  endtask

  task automatic rearm();
    @(negedge clk) fifo_arm = 1'b1;
    @(negedge clk) fifo_arm = 1'b0;
    start_n = 1'b0;
    repeat (3) @(negedge clk);
  endtask

  task automatic run(bit external, int t0, int t1);
    longint ts;
    // drive the selected near-end input
    @(negedge clk);
    #1234 start_n = 1'b1; ts = longint'($time);
    fork
      begin
        // baseline, then a step over threshold at T0, then a decaying tail
        repeat (3) begin
          @(negedge clk);
          if (external) ext = uv_t'(int'($urandom_range(0, 6000)) - 3000);
          else          pre_near = uv_t'(int'($urandom_range(0, 6000)) - 3000);
        end
        #((ts + t0 * D + D/2) - longint'($time));
        if (external) ext = uv_t'(60_000); else pre_near = uv_t'(60_000);
        for (int k = 0; k < 12; k++) begin
          @(negedge clk);
          if (external) ext = uv_t'(60_000 - 4_500 * k);
          else          pre_near = uv_t'(60_000 - 4_500 * k);
        end
        ext = '0; pre_near = '0;
      end
      begin
        #((ts + t1 * D + D/2) - longint'($time));
        if (cfg.tdc_test) test_stop[1] = 1'b1; else fetdc = 1'b1;
        #5000 fetdc = 1'b0; test_stop[1] = 1'b0;
      end
      if (cfg.tdc_test) begin
        #((ts + t0 * D + D/2) - longint'($time));
        test_stop[0] = 1'b1;
        #5000 test_stop[0] = 1'b0;
      end
    join
    #(64 * D);
    checks++;
    if (tdc_hit !== 2'b11 || tdc_time[0] !== 16'(t0) || tdc_time[1] !== 16'(t1)) begin
      failures++;
      $display("TDC expected %0d %0d got %b %0d %0d", t0, t1, tdc_hit, tdc_time[0], tdc_time[1]);
    end
    check_samples();
  endtask

  initial begin
    cfg = '0; cfg.en = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // far-end discriminator output
    pre_far = uv_t'(25_000); #100; checks++; if (fado !== 1'b1) failures++;
    pre_far = uv_t'(15_000); #100; checks++; if (fado !== 1'b0) failures++;
    cfg.far_ext = 1'b1; ext = uv_t'(30_000); #100; checks++; if (fado !== 1'b1) failures++;
    ext = '0; cfg.far_ext = 1'b0;
    // run 1: internal preamplifier
    run(1'b0, 2000, 2013);
    rearm();
    run(1'b0, 2517, 2490);
    rearm();
    // run 2: external input, TDC test inputs
    cfg.near_ext = 1'b1; cfg.tdc_test = 1'b1;
    run(1'b1, 3100, 3121);
    rearm();
    // ADC test input: a constant level
    cfg.adc_test = 1'b1; adc_test_v = uv_t'(-37_400);
    run(1'b1, 2600, 2600);
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
