`timescale 1ps/1ps
// tb_pom_backend -- the backend state machine against modelled channels.
// Writes a configuration into every channel over the command line and reads it
// back from the cfg outputs; arms; checks that a near-end stop on a disabled
// channel is ignored and one on an enabled channel triggers the sample buffers
// once; that a later hit is ignored (halt after one hit); that the 4 x 120-bit
// packets on txout/txdr carry the header, TDC words and samples given by the
// channel models; that nothing is recorded while halted; and that DISARM
// returns to idle.
module tb_pom_backend;
  import pom_pkg::*;
  localparam int NC = 4;
  logic            clk = 1'b0, rst_n = 1'b0, rxin = 1'b0;
  logic [NC-1:0]   near_stop = '0, fifo_done = '0;
  logic [1:0]      tdc_hit  [NC];
  tdc_word_t       tdc_time [NC][2];
  adc_code_t       samples  [NC][ADC_NSAMP];
  chan_cfg_t       cfg      [NC];
  logic            fifo_arm, fifo_trig, txout, txdr;
  int checks = 0, failures = 0;
  int ntrig = 0, narm = 0, nbits = 0;
  logic [PKT_CH_W-1:0] rx_pkt [NC];

  pom_backend #(.NCH(NC)) dut (
    .clk(clk), .rst_n(rst_n), .rxin(rxin), .near_stop(near_stop), .tdc_hit(tdc_hit),
    .tdc_time(tdc_time), .samples(samples), .fifo_done(fifo_done), .cfg(cfg),
    .fifo_arm(fifo_arm), .fifo_trig(fifo_trig), .txout(txout), .txdr(txdr));

  always #10000 clk = ~clk;

  // channel model: buffers freeze 15 clocks after the trigger, re-arm on fifo_arm
  int done_cnt = -1;
  always @(posedge clk) begin
    if (fifo_trig) begin ntrig++; done_cnt <= 15; end
    else if (done_cnt > 0) done_cnt <= done_cnt - 1;
    else if (done_cnt == 0) begin fifo_done <= '1; done_cnt <= -1; end
    if (fifo_arm) begin narm++; fifo_done <= '0; end
    if (txdr) begin
      rx_pkt[nbits / PKT_CH_W][PKT_CH_W - 1 - (nbits % PKT_CH_W)] <= txout;
      nbits++;
    end
  end

  task automatic send(logic [3:0] op, logic [11:0] arg);
    logic [15:0] w;
    w = {op, arg};
    @(negedge clk) rxin = 1'b1;
    for (int i = 15; i >= 0; i--) @(negedge clk) rxin = w[i];
    @(negedge clk) rxin = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  task automatic pulse_stop(int c);
    @(negedge clk) near_stop[c] = 1'b1;
    repeat (3) @(negedge clk);
    near_stop[c] = 1'b0;
    repeat (3) @(negedge clk);
  endtask

  function automatic logic [PKT_CH_W-1:0] expected_pkt(int c);
    logic [PKT_CH_W-1:0] p;
    p = {4'hA, 2'(c), tdc_hit[c][0], tdc_hit[c][1], tdc_time[c][0], tdc_time[c][1], 80'h0};
    for (int s = 0; s < ADC_NSAMP; s++) p[(ADC_NSAMP-1-s)*8 +: 8] = samples[c][s];
    return p;
  endfunction

  chan_cfg_t wcfg [NC];

  initial begin
    for (int c = 0; c < NC; c++) begin
      tdc_hit[c] = 2'b00;
      tdc_time[c][0] = 16'(1000 * c + 17);
      tdc_time[c][1] = 16'(1000 * c + 9);
      for (int s = 0; s < ADC_NSAMP; s++) samples[c][s] = 8'(16 * c + s + 100);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NC; c++) begin
      wcfg[c] = chan_cfg_t'(12'($urandom));
      wcfg[c].en = (c != 3);
      send(4'(1 + c), wcfg[c]);
    end
    for (int c = 0; c < NC; c++) begin checks++; if (cfg[c] !== wcfg[c]) failures++; end

    pulse_stop(0);                                     // not armed yet
    checks++; if (ntrig != 0) failures++;
    send(4'h8, '0);                                    // ARM
    checks++; if (narm != 1) failures++;
    pulse_stop(3);                                     // disabled channel
    checks++; if (ntrig != 0) failures++;
    tdc_hit[1] = 2'b11; tdc_hit[2] = 2'b01;
    pulse_stop(1);                                     // the event
    checks++; if (ntrig != 1) failures++;
    pulse_stop(0);                                     // second hit: ignored
    checks++; if (ntrig != 1) failures++;
    // wait for the transmission
    wait (nbits == NC * PKT_CH_W);
    repeat (5) @(negedge clk);
    checks++; if (nbits != NC * PKT_CH_W) failures++;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (rx_pkt[c] !== expected_pkt(c)) begin
        failures++;
        $display("ch %0d packet %h expected %h", c, rx_pkt[c], expected_pkt(c));
      end
    end
    pulse_stop(2);                                     // halted
    checks++; if (ntrig != 1) failures++;
    send(4'h8, '0);                                    // re-arm
    checks++; if (narm != 2) failures++;
    send(4'h9, '0);                                    // DISARM
    pulse_stop(2);
    checks++; if (ntrig != 1) failures++;
    send(4'h8, '0);
    pulse_stop(2);
    checks++; if (ntrig != 2) failures++;
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
