`timescale 1ps/1ps
// tb_pom_top -- end-to-end test of the whole chip at its default size (4
// channels), driven the way a DAQ board would drive it.
//
// Board wiring modelled here (the on-board loops of the paper's two example
// configurations): FADO of channel 1 feeds FETDC of channel 0, and FADO of
// channel 3 feeds FETDC of channel 2.
//   wire A, internal preamplifiers: near end -> channel 0 (pre_near), far end ->
//     channel 1's far-end preamplifier (pre_far) -> FADO1 -> FETDC0.
//   wire B, external preamplifiers: near end -> channel 2 receiver buffer (ext),
//     far end -> channel 3 receiver buffer -> far MUX -> FADO3 -> FETDC2.
// Channels 1 and 3 only serve far ends and are disabled as event sources.
// Every event: DAQ releases the TDC start, the wire pulse crosses the near-end
// threshold half a stage after ring step Tn and the far-end threshold after Tf;
// the packets that come back on TXOUT/TXDR must hold TDC0 = Tn, TDC1 = Tf and
// ten ADC codes within 1 LSB of the ideal codes of the voltages present at the
// 2 clock edges before the crossing and the 8 from the first edge after it
// (the buffers' trigger edge is 3 edges after that first edge).
// Mechanisms counted (each must occur): configuration writes, events, hits
// ignored while halted, hits ignored on a disabled channel, internal and
// external input selection, TDC/ADC test-input mode, ADC saturation, fine phase
// in each half of the ring loop, DISARM.
module tb_pom_top;
  import pom_pkg::*;
  localparam int NC = 4, D = 37, CLK = 20000;

  logic       clk = 1'b0, rst_n = 1'b0, rxin = 1'b0, start_n = 1'b0;
  logic       txout, txdr;
  uv_t        pre_near [NC], pre_far [NC], ext [NC], adc_test_v [NC], vth_near [NC], vth_far [NC];
  logic [1:0] test_stop [NC];
  logic [NC-1:0] fetdc, fado;
  logic [1:0] rf_sel [NC];
  logic [3:0] pz_sel [NC];

  int checks = 0, failures = 0;
  int n_cfg = 0, n_event = 0, n_halt_ignored = 0, n_disabled_ignored = 0, n_internal = 0,
      n_external = 0, n_testmode = 0, n_adc_sat = 0, n_fine_lo = 0, n_fine_hi = 0, n_disarm = 0;

  pom_top dut (
    .clk(clk), .rst_n(rst_n), .rxin(rxin), .txout(txout), .txdr(txdr), .tdc_start_n(start_n),
    .pre_near(pre_near), .pre_far(pre_far), .ext(ext), .adc_test_v(adc_test_v),
    .vth_near(vth_near), .vth_far(vth_far), .test_stop(test_stop), .fetdc(fetdc), .fado(fado),
    .pre_rf_sel(rf_sel), .pre_pz_sel(pz_sel));

  always #(CLK/2) clk = ~clk;

  assign fetdc = {1'b0, fado[3], 1'b0, fado[1]};

  // ---- ADC input history and trigger edge -----------------------------------------
  chan_cfg_t cfg_m [NC];          // what the TB has written
  int vhist [NC][4096];
  int edge_n = 0, trig_edge = -1, ntrig = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++)
      vhist[c][edge_n % 4096] = cfg_m[c].adc_test ? int'(adc_test_v[c]) :
                                cfg_m[c].near_ext ? int'(ext[c]) : int'(pre_near[c]);
    if (dut.fifo_trig) begin trig_edge = edge_n; ntrig++; end
    edge_n++;
  end

  // ---- serial receiver ------------------------------------------------------------------
  logic [PKT_CH_W-1:0] rx_pkt [NC];
  int nbits = 0;
  always @(posedge clk) if (txdr) begin
    rx_pkt[(nbits / PKT_CH_W) % NC][PKT_CH_W - 1 - (nbits % PKT_CH_W)] <= txout;
    nbits <= nbits + 1;
  end

  // ---- DAQ helpers ----------------------------------------------------------------------
  task automatic send(logic [3:0] op, logic [11:0] arg);
    logic [15:0] w;
    w = {op, arg};
    @(negedge clk) rxin = 1'b1;
    for (int i = 15; i >= 0; i--) @(negedge clk) rxin = w[i];
    @(negedge clk) rxin = 1'b0;
    repeat (2) @(negedge clk);
  endtask

  task automatic write_cfg(int c, chan_cfg_t v);
    send(4'(1 + c), 12'(v));
    cfg_m[c] = v;
    n_cfg++;
    checks++;
    if (rf_sel[c] !== v.rf_sel || pz_sel[c] !== v.pz_sel) failures++;
  endtask

  function automatic int ideal(int v);
    int e;
    e = 128 + ((v >= 0) ? v / 1000 : -((-v + 999) / 1000));
    return (e < 1) ? 1 : (e > 255) ? 255 : e;
  endfunction

  // pulse shape on the selected input: step to `amp` at the crossing, then a
  // linear decay, one value per clock
  // which: 0 = pre_near, 1 = pre_far, 2 = ext of channel c
  task automatic set_node(int which, int c, int v);
    case (which)
      0:       pre_near[c] = uv_t'(v);
      1:       pre_far[c]  = uv_t'(v);
      default: ext[c]      = uv_t'(v);
    endcase
  endtask

  task automatic wire_pulse(int which, int c, longint t_cross, int amp);
    #(t_cross - longint'($time));
    set_node(which, c, amp);
    for (int k = 1; k < 14; k++) begin
      @(negedge clk);
      set_node(which, c, amp - (amp / 14) * k);
    end
    set_node(which, c, 0);
  endtask

  // one event: returns after the packets have been received and checked
  task automatic do_event(int c_near, int tn, int tf, int amp, bit use_test);
    longint ts;
    int bits0, fine;
    bits0 = nbits;
    send(4'h8, '0);                               // ARM
    @(negedge clk) start_n = 1'b0;
    @(negedge clk);
    #1111 start_n = 1'b1; ts = longint'($time);
    fork
      if (use_test) begin
        #(ts + tn * D + D/2 - longint'($time)) test_stop[c_near][0] = 1'b1;
        #3000 test_stop[c_near][0] = 1'b0;
      end else if (cfg_m[c_near].near_ext) wire_pulse(2, c_near, ts + tn * D + D/2, amp);
      else                                   wire_pulse(0, c_near, ts + tn * D + D/2, amp);
      if (use_test) begin
        #(ts + tf * D + D/2 - longint'($time)) test_stop[c_near][1] = 1'b1;
        #3000 test_stop[c_near][1] = 1'b0;
      end else if (c_near == 0) wire_pulse(1, 1, ts + tf * D + D/2, amp);
      else                      wire_pulse(2, 3, ts + tf * D + D/2, amp);
    join
    // a further hit while the event is being read out must be ignored
    #(3 * CLK) pre_near[0] = uv_t'(90_000);
    #(2 * CLK) pre_near[0] = '0;
    wait (nbits == bits0 + NC * PKT_CH_W);
    repeat (4) @(negedge clk);
    n_event++;
    $display("event %0d on channel %0d received at %0t", n_event, c_near, $time);
    // check the packets
    for (int c = 0; c < NC; c++) begin
      logic [PKT_CH_W-1:0] p;
      p = rx_pkt[c];
      checks++;
      if (p[PKT_CH_W-1 -: 4] !== PKT_MARK || p[PKT_CH_W-5 -: 2] !== 2'(c)) begin
        failures++; $display("ch %0d bad header %h", c, p[PKT_CH_W-1 -: 8]);
      end
    end
    begin
      logic [PKT_CH_W-1:0] p;
      int t0, t1;
      p  = rx_pkt[c_near];
      t0 = int'(p[PKT_CH_W-9 -: 16]);
      t1 = int'(p[PKT_CH_W-25 -: 16]);
      checks++;
      if (p[PKT_CH_W-7 -: 2] !== 2'b11 || t0 != tn || t1 != tf) begin
        failures++;
        $display("event ch %0d: hits %b TDC0 %0d (exp %0d) TDC1 %0d (exp %0d)", c_near,
                 p[PKT_CH_W-7 -: 2], t0, tn, t1, tf);
      end
      checks++;
      if (t0 - t1 != tn - tf) failures++;
      fine = tn % 32;
      if (fine < 16) n_fine_lo++; else n_fine_hi++;
      for (int k = 0; k < ADC_NSAMP; k++) begin
        int e, got;
        e   = ideal(vhist[c_near][(trig_edge - 3 - ADC_PRE + k) % 4096]);
        got = int'(p[(ADC_NSAMP-1-k)*8 +: 8]);
        checks++;
        if (got < e - 1 || got > e + 1) begin
          failures++;
          $display("event ch %0d sample %0d = %0d ideal %0d", c_near, k, got, e);
        end
        if (got == 255) n_adc_sat++;
      end
      // the crossing lies between samples PRE-1 (baseline) and PRE (pulse)
      if (!use_test) begin
        checks++;
        if (int'(p[(ADC_NSAMP-ADC_PRE)*8 +: 8]) > 129 || int'(p[(ADC_NSAMP-1-ADC_PRE)*8 +: 8]) < 128 + 15) begin
          failures++;
          $display("event ch %0d: crossing not between samples %0d and %0d", c_near, ADC_PRE-1, ADC_PRE);
        end
      end
    end
    checks++;
    if (ntrig != n_event) begin failures++; $display("triggers %0d events %0d", ntrig, n_event); end
    else n_halt_ignored++;    // the extra hit during readout did not retrigger
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      pre_near[c] = '0; pre_far[c] = '0; ext[c] = '0; adc_test_v[c] = '0;
      vth_near[c] = uv_t'(15_000); vth_far[c] = uv_t'(15_000);
      test_stop[c] = 2'b00;
      cfg_m[c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- configuration: wire A on channels 0/1 (internal), wire B on 2/3 (external)
    begin
      chan_cfg_t v;
      v = '0; v.en = 1'b1; v.rf_sel = 2'd2; v.pz_sel = 4'd9;            write_cfg(0, v);
      v = '0; v.rf_sel = 2'd1; v.pz_sel = 4'd5;                           write_cfg(1, v);
      v = '0; v.en = 1'b1; v.near_ext = 1'b1;                             write_cfg(2, v);
      v = '0; v.far_ext = 1'b1;                                           write_cfg(3, v);
    end

    // ---- disabled channel: a hit on channel 1's near end does not trigger
    send(4'h8, '0);
    pre_near[1] = uv_t'(50_000); repeat (6) @(negedge clk); pre_near[1] = '0;
    repeat (4) @(negedge clk);
    checks++; if (ntrig != 0) failures++; else n_disabled_ignored++;
    send(4'h9, '0);                                   // DISARM
    n_disarm++;
    pre_near[0] = uv_t'(50_000); repeat (6) @(negedge clk); pre_near[0] = '0;
    repeat (4) @(negedge clk);
    checks++; if (ntrig != 0) failures++;

    // ---- wire A, internal preamplifier: fine phase low half, then high half
    do_event(0, 1500, 1553, 60_000, 0);  n_internal++;
    do_event(0, 2020, 2001, 80_000, 0);  n_internal++;
    // ---- wire B, external preamplifier; large pulse saturates the ADC
    do_event(2, 1800, 1790, 200_000, 0); n_external++;
    // ---- near end late in the 2 us range
    do_event(0, 54000, 54012, 40_000, 0); n_internal++;
    // ---- test inputs: TDC stops from test pins, ADC converts a test level
    begin
      chan_cfg_t v;
      v = cfg_m[0]; v.tdc_test = 1'b1; v.adc_test = 1'b1; write_cfg(0, v);
      adc_test_v[0] = uv_t'(-42_300);
      do_event(0, 3333, 3300, 0, 1); n_testmode++;
      v.tdc_test = 1'b0; v.adc_test = 1'b0; write_cfg(0, v);
    end

    if (n_cfg == 0)              begin failures++; $display("never: config write"); end
    if (n_event == 0)            begin failures++; $display("never: event"); end
    if (n_halt_ignored == 0)     begin failures++; $display("never: hit ignored while halted"); end
    if (n_disabled_ignored == 0) begin failures++; $display("never: disabled channel ignored"); end
    if (n_internal == 0)         begin failures++; $display("never: internal input"); end
    if (n_external == 0)         begin failures++; $display("never: external input"); end
    if (n_testmode == 0)         begin failures++; $display("never: test mode"); end
    if (n_adc_sat == 0)          begin failures++; $display("never: ADC saturation"); end
    if (n_fine_lo == 0 || n_fine_hi == 0) begin failures++; $display("never: both loop halves"); end
    if (n_disarm == 0)           begin failures++; $display("never: disarm"); end
    $display("mechanisms: cfg=%0d events=%0d halt_ignored=%0d disabled_ignored=%0d internal=%0d external=%0d test=%0d adc_sat=%0d fine_lo=%0d fine_hi=%0d disarm=%0d",
             n_cfg, n_event, n_halt_ignored, n_disabled_ignored, n_internal, n_external,
             n_testmode, n_adc_sat, n_fine_lo, n_fine_hi, n_disarm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
