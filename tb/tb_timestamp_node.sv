// tb_timestamp_node: 1 GHz local clock, 125 MHz Ethernet clock, central
// pulse every microsecond. Triggers at random times (kept >5 ns away from a
// pulse edge) are recorded by the testbench; every time-stamp frame is
// checked against them: FCS, addresses, EtherType, node id, event number,
// microsecond count, nanoseconds since the pulse (+-1) and the busy flag. Then a pair of
// triggers 6 ns apart (second one inside the handshake window: counted as
// missed), a burst faster than the link (FIFO overflow counted), a control
// frame that changes the destination MAC, and loss of sync_ok when the
// central pulses stop.
module tb_timestamp_node
  import cta_pkg::*;
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam logic [15:0] NODE = 16'h0100;
  localparam logic [47:0] MYMAC = {MAC_PREFIX, 8'h00, NODE};
  localparam logic [47:0] PC = 48'h0000DEADBEEF;
  logic clk = 0, clk_ns = 0, rst_n = 0, pulse = 0, trig = 0, busy = 0;
  logic [7:0] txd, rxd = 0;
  logic tx_en, rx_dv = 0, rx_er = 0, sync_ok;
  logic [15:0] overflows;
  logic [31:0] frames_sent;
  logic done, fcs_ok, pre_ok;
  int len, gap, nframes;
  logic [7:0] body [2048];
  int checks = 0, failures = 0;

  always #4 clk = ~clk;
  always #0.5 clk_ns = ~clk_ns;

  timestamp_node dut (
    .clk, .clk_ns, .rst_n, .node_id(NODE), .usec_pulse(pulse), .camera_trigger(trig), .camera_busy(busy),
    .gmii_txd(txd), .gmii_tx_en(tx_en), .gmii_rxd(rxd), .gmii_rx_dv(rx_dv), .gmii_rx_er(rx_er),
    .sync_ok, .overflows, .frames_sent
  );
  gmii_sink u_sink (.clk, .rst_n, .txd, .tx_en, .done, .len, .body, .fcs_ok, .pre_ok, .gap, .frames(nframes));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // central clock
  real t_pulse[$];
  bit pulses_on = 1;
  initial begin
    #100.3;
    while (1) begin
      if (pulses_on) begin pulse = 1; t_pulse.push_back($realtime); end
      #100 pulse = 0;
      #900;
    end
  end

  // expected records, by event number
  real  t_trig [int];
  bit   busy_at [int];
  logic [47:0] exp_dst = 48'hFFFFFFFFFFFF;
  int next_ev = 0, missed_exp = 0, checked = 0, ts_errors = 0;
  int skip_ts [int];

  function automatic int pulses_before(input real t);
    int n = 0;
    foreach (t_pulse[i]) if (t_pulse[i] <= t) n++;
    return n;
  endfunction

  always @(posedge clk) if (done) begin
    automatic logic [31:0] evn = {body[18], body[19], body[20], body[21]};
    automatic logic [47:0] us  = {body[22], body[23], body[24], body[25], body[26], body[27]};
    automatic logic [15:0] ns  = {body[28], body[29]};
    check(fcs_ok && pre_ok && len == 60, $sformatf("frame intact, len %0d", len));
    check({body[0], body[1], body[2], body[3], body[4], body[5]} == exp_dst, "destination MAC");
    check({body[6], body[7], body[8], body[9], body[10], body[11]} == MYMAC, "source MAC");
    check({body[12], body[13]} == ETHERTYPE_DAQ && body[14] == MSG_TSTAMP &&
          {body[16], body[17]} == NODE, "type, message and node id");
    if (!t_trig.exists(int'(evn))) begin
      check(0, $sformatf("unknown event %0d", evn));
    end else begin
      automatic real t = t_trig[int'(evn)];
      automatic int  np = pulses_before(t);
      automatic real d = t - t_pulse[np - 1];
      if (body[34] != {7'b0, busy_at[int'(evn)]}) begin
        ts_errors++;
        $display("FAIL ev %0d: flags %0h exp busy %0b", evn, body[34], busy_at[int'(evn)]);
      end
      if (!(int'(us) == np && real'(ns) >= d - 1.0 && real'(ns) <= d + 1.0)) begin
        ts_errors++;
        $display("FAIL ev %0d: usec %0d exp %0d, nsec %0d exp %0.1f", evn, us, np, ns, d);
      end
      checked++;
    end
  end

  task automatic fire(input real width);
    // stay clear of pulse edges
    while (($realtime - t_pulse[$]) < 6.0 || ($realtime - t_pulse[$]) > 994.0) #7;
    trig = 1; t_trig[next_ev] = $realtime; busy_at[next_ev] = busy; next_ev++;
    #(width) trig = 0;
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
    #20 rst_n = 1;
    #2500;
    check(sync_ok, "sync_ok with pulses");
    for (int i = 0; i < 8; i++) begin
      #($urandom_range(300, 2500)); busy = 1'(i % 2); #10; fire(20);
    end
    #3000;
    check(nframes == 8, $sformatf("one frame per trigger: %0d", nframes));
    // pair inside the handshake window
    fire(3); #3;
    trig = 1; next_ev++; missed_exp++; #3 trig = 0;
    #3000;
    check(nframes == 9, "second of a close pair not stamped");
    check(body[30] == 8'h00 && body[31] == 8'h00, "missed count before the pair is zero");
    fire(20); #3000;
    check({body[30], body[31]} == 16'(missed_exp), $sformatf("missed count %0d", {body[30], body[31]}));
    // burst faster than the link: FIFO overflows
    for (int i = 0; i < 30; i++) begin fire(20); #40; end
    #40000;
    check(overflows > 0, $sformatf("FIFO overflows counted: %0d", overflows));
    check(nframes + int'(overflows) == next_ev - missed_exp,
          $sformatf("frames %0d + overflows %0d == stamped %0d", nframes, overflows, next_ev - missed_exp));
    // new destination over Ethernet
    send_ctrl(8'(REG_DMAC_HI), 32'(PC[47:32]));
    send_ctrl(8'(REG_DMAC_LO), PC[31:0]);
    exp_dst = PC;
    fire(20); #3000;
    check(checked == nframes && ts_errors == 0, $sformatf("%0d frames checked, %0d time stamp errors", checked, ts_errors));
    check(frames_sent == 32'(nframes), "frames_sent");
    pulses_on = 0; #3000;
    check(!sync_ok, "sync_ok drops without pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
