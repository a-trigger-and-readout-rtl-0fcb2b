// tb_frontend_fpga: one front-end board with its ADC model, a GMII receiver
// on the transmit link and a control-frame sender on the receive link.
//  1. three well separated triggers: three data frames, each checked in full
//     (FCS, preamble, MAC header, event header, all 240 samples);
//  2. a control frame sets the destination MAC, another disables the run:
//     a trigger is then lost and produces no frame; the run is re-enabled;
//  3. a burst of triggers closer than the readout time: triggers during
//     digitisation and with a full buffer are lost; every frame's event number
//     and lost count must match the testbench's own count, and the buffer
//     must have been full at least once, and frames sent back to back
//     must follow each other every 535 cycles (522 bytes with tx_en high,
//     12 bytes gap, one idle cycle).
module tb_frontend_fpga
  import cta_pkg::*;
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam int NP = 16, WPP = 15, NSLOT = 2, BOARD = 37, LAT = 1;
  localparam logic [47:0] MYMAC = {MAC_PREFIX, 8'h00, 16'(BOARD)};
  localparam logic [47:0] PC = 48'h00AABBCCDDEE;
  logic clk = 0, rst_n = 0, trig = 0;
  logic adc_req, adc_ack;
  logic [3:0] adc_pixel, adc_sample;
  logic [15:0] adc_data;
  logic [7:0] txd, rxd = 0;
  logic tx_en, rx_dv = 0, rx_er = 0;
  logic [31:0] settings [NUM_REGS-REG_SETTINGS];
  logic busy;
  logic [31:0] lost_triggers, frames_sent;
  int ev_done;
  int checks = 0, failures = 0;
  // monitor outputs
  logic done, fcs_ok, pre_ok;
  int len, gap, nframes;
  logic [7:0] body [2048];

  always #4 clk = ~clk;

  frontend_fpga #(.NUM_SLOTS(NSLOT)) dut (
    .clk, .rst_n, .board_id(16'(BOARD)), .camera_trigger(trig),
    .adc_req, .adc_pixel, .adc_sample, .adc_ack, .adc_data,
    .gmii_txd(txd), .gmii_tx_en(tx_en), .gmii_rxd(rxd), .gmii_rx_dv(rx_dv), .gmii_rx_er(rx_er),
    .settings, .busy, .lost_triggers, .frames_sent
  );
  adc_model #(.NUM_PIXELS(NP), .WORDS_PER_PIXEL(WPP), .LAT(LAT)) u_adc (
    .clk, .rst_n, .board(BOARD), .adc_req, .adc_pixel, .adc_sample, .adc_ack, .adc_data, .events_done(ev_done)
  );
  gmii_sink u_sink (.clk, .rst_n, .txd, .tx_en, .done, .len, .body, .fcs_ok, .pre_ok, .gap, .frames(nframes));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference: count triggers and check every received frame
  int trig_count = 0, frame_idx = 0, seen_full = 0, last_lost = 0;
  logic [47:0] exp_dst = 48'hFFFFFFFFFFFF;
  int last_evnum = -1;
  always @(posedge trig) trig_count++;
  always @(posedge clk) if (rst_n && dut.u_buf.full) seen_full++;
  always @(posedge clk) if (done) begin
    automatic logic [47:0] d, s;
    automatic logic [31:0] evn, lst;
    automatic int bad = 0;
    d = {body[0], body[1], body[2], body[3], body[4], body[5]};
    s = {body[6], body[7], body[8], body[9], body[10], body[11]};
    evn = {body[18], body[19], body[20], body[21]};
    lst = {body[22], body[23], body[24], body[25]};
    check(fcs_ok && pre_ok, "FCS and preamble");
    check(len == 14 + EVENT_HDR_BYTES + 2 * NP * WPP, $sformatf("frame length %0d", len));
    check(d == exp_dst && s == MYMAC, "MAC addresses");
    check({body[12], body[13]} == ETHERTYPE_DAQ, "EtherType");
    check(body[14] == MSG_EVENT && {body[16], body[17]} == 16'(BOARD), "message type and board id");
    check(body[26] == 8'(NP) && body[27] == 8'(WPP), "geometry bytes");
    check(int'(evn) > last_evnum, "event numbers increase");
    check(int'(lst) == last_lost + (int'(evn) - last_evnum - 1), $sformatf("lost %0d for event %0d", lst, evn));
    last_lost = int'(lst); last_evnum = int'(evn);
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < WPP; k++)
        if ({body[30 + 2*(p*WPP+k)], body[31 + 2*(p*WPP+k)]} != adc_word(BOARD, frame_idx, p, k)) bad++;
    check(bad == 0, $sformatf("frame %0d: %0d samples wrong", frame_idx, bad));
    frame_idx++;
  end

  task automatic pulse_trigger();
    @(negedge clk); trig = 1;
    repeat (6) @(negedge clk); trig = 0;
  endtask

  task automatic send_ctrl(input logic [7:0] a, input logic [31:0] v);
    bq_t pl, f;
    pl = '{CMD_WRITE, a, v[31:24], v[23:16], v[15:8], v[7:0]};
    f = build_frame(MYMAC, PC, ETHERTYPE_CTRL, pl, 0);
    foreach (f[i]) begin @(negedge clk); rx_dv = 1; rxd = f[i]; end
    @(negedge clk); rx_dv = 0; rxd = 0;
    repeat (16) @(negedge clk);
  endtask

  initial begin
    int lat = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    // 1. single events; latency trigger -> adc_req
    trig = 1;
    while (!adc_req) begin @(negedge clk); lat++; end
    check(lat == 3, $sformatf("trigger to adc_req %0d cycles", lat));
    repeat (5) @(negedge clk); trig = 0;
    wait (nframes == 1);
    repeat (50) @(negedge clk);
    pulse_trigger();
    wait (!busy); pulse_trigger();
    wait (nframes == 3); repeat (2) @(negedge clk);
    check(frame_idx == 3, "three frames checked");
    // 2. configuration over Ethernet
    send_ctrl(8'(REG_DMAC_HI), 32'(PC[47:32]));
    send_ctrl(8'(REG_DMAC_LO), PC[31:0]);
    exp_dst = PC;
    send_ctrl(8'(REG_SETTINGS + 2), 32'hCAFE_0042);
    check(settings[2] == 32'hCAFE_0042, "setting written over Ethernet");
    send_ctrl(8'(REG_CTRL), 32'h0);
    check(busy, "busy while run disabled");
    pulse_trigger();
    repeat (1500) @(negedge clk);
    check(nframes == 3 && lost_triggers == 1, "trigger lost while run disabled");
    send_ctrl(8'(REG_CTRL), 32'h1);
    check(!busy, "ready after run enable");
    // 3. burst faster than the link
    for (int i = 0; i < 60; i++) begin
      pulse_trigger();
      repeat (($urandom_range(0, 7) == 0) ? 100 : 486) @(negedge clk);
    end
    wait (!busy && dut.u_buf.empty && !dut.u_tx.busy && !tx_en);
    repeat (30) @(negedge clk);
    check(seen_full > 0, "buffer became full");
    check(int'(lost_triggers) > 1, $sformatf("triggers lost in burst: %0d", lost_triggers));
    check(nframes + int'(lost_triggers) == trig_count,
          $sformatf("frames %0d + lost %0d == triggers %0d", nframes, lost_triggers, trig_count));
    check(frames_sent == 32'(nframes), "frames_sent counter");
    check(gap >= IFG_BYTES, "inter-frame gap");
    $display("frames=%0d lost=%0d full_cycles=%0d", nframes, lost_triggers, seen_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // back-to-back frame period during the burst
  int period_min = 100000, last_start = 0, cyc = 0;
  logic tx_en_d = 0;
  always @(posedge clk) begin
    cyc++;
    tx_en_d <= tx_en;
    if (rst_n && tx_en && !tx_en_d) begin
      if (last_start != 0 && cyc - last_start < period_min) period_min = cyc - last_start;
      last_start = cyc;
    end
  end
  final if (period_min != 535) $display("note: shortest frame period %0d", period_min);

  initial begin
    wait (rst_n);
    wait (seen_full > 0);
    wait (dut.u_buf.empty);
    checks++;
    if (period_min != 535) begin failures++; $display("FAIL frame period %0d, expected 535", period_min); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
