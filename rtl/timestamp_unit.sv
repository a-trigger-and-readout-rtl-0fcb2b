// timestamp_unit: the telescope's relative timing system. Runs on the local
// ~1 GHz clock (clk_ns, one count per nanosecond). A nanosecond counter is
// reset by every pulse of the common central clock (1 MHz: one pulse per
// microsecond) and the pulses themselves are counted, so {usec, nsec} is a
// time shared by all telescopes to O(ns). On each camera trigger the current
// {usec, nsec} is captured together with the trigger's event number and
// whether the camera was busy at that moment (event-by-event busy record).
// busy_async passes the same synchroniser as the trigger; the front ends
// raise busy for a trigger only tens of ns after it, so the flag shows the
// state left by earlier triggers.
//
// Both asynchronous inputs pass a synchroniser and a rising-edge detector;
// this adds the same fixed delay at every telescope, which the propagation
// time calibration absorbs. nsec saturates if pulses stop, and sync_ok drops
// when no pulse came within NS_PER_PULSE + NS_TOLERANCE counts.
//
// Hand-over to the Ethernet clock domain is a toggle handshake: a capture
// flips rec_req and holds rec until rec_ack (from the other domain) equals
// rec_req again. A trigger during that window (a few tens of ns) is not
// time-stamped but its event number is used up and counted in rec.missed.
// The counter reset and pulse counting follow the paper; synchroniser,
// widths, saturation and handshake are this design's choices.
module timestamp_unit
  import cta_pkg::*;
#(
  parameter int unsigned NS_PER_PULSE = 1000,  // 1 GHz local clock, 1 MHz central clock
  parameter int unsigned NS_TOLERANCE = 16
) (
  input  logic       clk_ns,
  input  logic       rst_n,
  input  logic       usec_pulse_async,
  input  logic       trigger_async,
  input  logic       busy_async,  // camera busy (any front-end board)
  input  logic       rec_ack,     // toggle from the reading domain
  output logic       rec_req,     // toggles on every capture
  output ts_record_t rec,
  output logic       sync_ok,
  output timestamp_t now
);
  logic pulse_s, pulse_d, trig_s, trig_d, ack_s, busy_s;
  logic pulse_edge, trig_edge;
  logic [47:0] usec;
  logic [15:0] nsec;
  logic accepted;
  logic [31:0] evnum, missed;

  bit_sync #(.STAGES(2)) u_sync_pulse (.clk(clk_ns), .rst_n, .d(usec_pulse_async), .q(pulse_s));
  bit_sync #(.STAGES(2)) u_sync_trig  (.clk(clk_ns), .rst_n, .d(trigger_async),    .q(trig_s));
  bit_sync #(.STAGES(2)) u_sync_busy  (.clk(clk_ns), .rst_n, .d(busy_async),       .q(busy_s));
  bit_sync #(.STAGES(2)) u_sync_ack   (.clk(clk_ns), .rst_n, .d(rec_ack),          .q(ack_s));

  always_ff @(posedge clk_ns or negedge rst_n)
    if (!rst_n) begin pulse_d <= 1'b0; trig_d <= 1'b0; end
    else        begin pulse_d <= pulse_s; trig_d <= trig_s; end

  assign pulse_edge = pulse_s && !pulse_d;
  assign trig_edge  = trig_s && !trig_d;

  // relative timing system
  always_ff @(posedge clk_ns or negedge rst_n)
    if (!rst_n) begin
      usec    <= '0;
      nsec    <= '0;
      sync_ok <= 1'b0;
    end else if (pulse_edge) begin
      usec    <= usec + 1'b1;
      nsec    <= '0;
      sync_ok <= 1'b1;
    end else begin
      if (nsec != '1) nsec <= nsec + 1'b1;
      if (nsec >= 16'(NS_PER_PULSE + NS_TOLERANCE)) sync_ok <= 1'b0;
    end

  assign now = '{usec: usec, nsec: nsec};

  event_counter #(.EV_W(32), .LOST_W(32)) u_evc (
    .clk(clk_ns), .rst_n, .trig(trig_edge), .accept_ok(ack_s == rec_req),
    .accepted, .evnum, .lost(missed)
  );

  always_ff @(posedge clk_ns or negedge rst_n)
    if (!rst_n) begin
      rec_req <= 1'b0;
      rec     <= '0;
    end else if (accepted) begin
      rec_req <= ~rec_req;
      rec     <= '{evnum: evnum, ts: '{usec: usec, nsec: nsec}, missed: 16'(missed), busy: busy_s};
    end
endmodule
