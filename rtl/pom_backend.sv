`timescale 1ps/1ps
// pom_backend -- the shared digital backend of the POM chip.
//
// One state machine serves all NCH channels:
//   IDLE    -- waits for an ARM command.  Configuration writes are accepted in
//              every state.
//   ARMED   -- the sample buffers run; the first rising edge of the near-end
//              stop of any enabled channel is the event.  The edge sets a
//              catcher flip-flop (so pulses shorter than a clock are not lost)
//              whose output is synchronised to clk; the trigger follows the stop
//              by two to three clocks.
//              `fifo_trig` pulses to every channel.  DISARM returns to IDLE.
//   CAPTURE -- waits until every channel's sample buffer has frozen.
//   SEND    -- shifts one packet per channel out on `txout`, MSB first, one bit
//              per clock, with `txdr` high for every packet bit.  Packet of
//              channel c: {4'hA, c[1:0], hit0, hit1, TDC0[15:0], TDC1[15:0],
//              sample0 .. sample9 (8 bits each)} = 120 bits.
//   HALT    -- the chip records nothing more until the next ARM, which also
//              re-arms the sample buffers.
// Further hits after the event are ignored: like the prototype, the backend
// halts after one hit and has no double-hit readout.
// The configuration of each channel lives here in a triple-redundant register
// (tmr_config), written by command WRCFGn; commands arrive through cmd_rx.
// The paper gives the backend's duties (event identification, packaging,
// command response, serial transmission, halting after a hit) and the pin names
// TXOUT and TXDR; states, commands, packet format and pin protocol are this
// design's.  TDC results are read while the state machine is in SEND, long after
// the asynchronous hit registers have settled; their hit flags pass through
// two-flop synchronisers.
module pom_backend #(
  parameter int unsigned NCH = pom_pkg::NCH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rxin,
  // per channel, from the channels
  input  logic [NCH-1:0]        near_stop,    // asynchronous
  input  logic [1:0]            tdc_hit  [NCH], // asynchronous
  input  pom_pkg::tdc_word_t    tdc_time [NCH][2],
  input  pom_pkg::adc_code_t    samples  [NCH][pom_pkg::ADC_NSAMP],
  input  logic [NCH-1:0]        fifo_done,
  // to the channels
  output pom_pkg::chan_cfg_t    cfg [NCH],
  output logic                  fifo_arm,
  output logic                  fifo_trig,
  // serial output
  output logic                  txout,
  output logic                  txdr
);
  import pom_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_ARMED, S_CAPTURE, S_SEND, S_HALT} state_e;

  localparam int unsigned BIT_W = $clog2(PKT_CH_W);
  localparam int unsigned CH_W  = (NCH > 1) ? $clog2(NCH) : 1;

  state_e                state;
  logic                  cmd_valid;
  logic [CMD_W-1:0]      cmd;
  op_e                   op;
  logic [NCH-1:0]        caught;      // stop edge seen while armed
  logic                  catch_clr;   // holds the catchers clear outside ARMED
  logic [NCH-1:0]        stop_s1, stop_s2, stop_s3;
  logic [1:0]            hit_s1 [NCH];
  logic [1:0]            hit_s2 [NCH];
  logic                  trig_now;
  logic [CH_W-1:0]       ch_idx;
  logic [BIT_W-1:0]      bit_idx;
  logic [PKT_CH_W-1:0]   pkt;

  // ---- commands and configuration ------------------------------------------
  cmd_rx #(.FRAME(CMD_W)) u_rx (
    .clk (clk), .rst_n (rst_n), .rxin (rxin), .cmd_valid (cmd_valid), .cmd (cmd)
  );

  assign op = op_e'(cmd[CMD_W-1 -: 4]);

  for (genvar c = 0; c < NCH; c++) begin : g_cfg
    logic [CFG_W-1:0] q;
    tmr_config #(.WIDTH(CFG_W)) u_cfg (
      .clk   (clk),
      .rst_n (rst_n),
      .we    (cmd_valid && (cmd[CMD_W-1 -: 4] == 4'(int'(OP_WRCFG0) + c))),
      .wdata (cmd[CFG_W-1:0]),
      .q     (q)
    );
    assign cfg[c] = chan_cfg_t'(q);
  end

  // ---- stop catchers and synchronisers ------------------------------------------
  // A stop pulse can be shorter than a clock period (a test-input pulse, a
  // narrow discriminator pulse), so each near-end stop first sets a flip-flop
  // clocked by the stop itself; the catcher is held clear except in ARMED.
  for (genvar c = 0; c < NCH; c++) begin : g_catch
    logic q;
    always_ff @(posedge near_stop[c] or posedge catch_clr) begin
      if (catch_clr) q <= 1'b0;
      else           q <= 1'b1;
    end
    assign caught[c] = q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) catch_clr <= 1'b1;
    else        catch_clr <= (state != S_ARMED);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stop_s1 <= '0;
      stop_s2 <= '0;
      stop_s3 <= '0;
      for (int c = 0; c < NCH; c++) begin
        hit_s1[c] <= '0;
        hit_s2[c] <= '0;
      end
    end else begin
      stop_s1 <= caught;
      stop_s2 <= stop_s1;
      stop_s3 <= stop_s2;
      for (int c = 0; c < NCH; c++) begin
        hit_s1[c] <= tdc_hit[c];
        hit_s2[c] <= hit_s1[c];
      end
    end
  end

  always_comb begin
    trig_now = 1'b0;
    for (int c = 0; c < NCH; c++)
      if (cfg[c].en && stop_s2[c] && !stop_s3[c]) trig_now = 1'b1;
  end

  // ---- packet of the channel being sent -----------------------------------------
  always_comb begin
    pkt = {PKT_MARK, 2'(ch_idx), hit_s2[ch_idx][0], hit_s2[ch_idx][1],
           tdc_time[ch_idx][0], tdc_time[ch_idx][1], {PKT_CH_W-8-2*TDC_W{1'b0}}};
    for (int s = 0; s < ADC_NSAMP; s++)
      pkt[(ADC_NSAMP-1-s)*ADC_BITS +: ADC_BITS] = samples[ch_idx][s];
  end

  // ---- state machine ----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      fifo_arm  <= 1'b0;
      fifo_trig <= 1'b0;
      ch_idx    <= '0;
      bit_idx   <= '0;
      txout     <= 1'b0;
      txdr      <= 1'b0;
    end else begin
      fifo_arm  <= 1'b0;
      fifo_trig <= 1'b0;
      txout     <= 1'b0;
      txdr      <= 1'b0;
      unique case (state)
        S_IDLE, S_HALT: begin
          if (cmd_valid && op == OP_ARM) begin
            state    <= S_ARMED;
            fifo_arm <= 1'b1;
          end
        end
        S_ARMED: begin
          if (cmd_valid && op == OP_DISARM) begin
            state <= S_IDLE;
          end else if (trig_now) begin
            state     <= S_CAPTURE;
            fifo_trig <= 1'b1;
          end
        end
        S_CAPTURE: begin
          // fifo_trig is registered, so the buffers see it one clock after
          // this state is entered; wait until all of them have frozen.
          if (!fifo_trig && (&fifo_done)) begin
            state   <= S_SEND;
            ch_idx  <= '0;
            bit_idx <= '0;
          end
        end
        S_SEND: begin
          txout <= pkt[PKT_CH_W-1-int'(bit_idx)];
          txdr  <= 1'b1;
          if (bit_idx == BIT_W'(PKT_CH_W-1)) begin
            bit_idx <= '0;
            if (ch_idx == CH_W'(NCH-1)) state  <= S_HALT;
            else                        ch_idx <= ch_idx + 1'b1;
          end else begin
            bit_idx <= bit_idx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The serial line only carries data while a packet is being sent.
  assert property (@(posedge clk) disable iff (!rst_n) txdr |-> $past(state) == S_SEND);

endmodule
