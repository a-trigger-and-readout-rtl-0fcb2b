// tb_timestamp_unit: 1 ns local clock, a microsecond pulse every
// NS_PER_PULSE ns (shortened), triggers at known times. Checks that each
// capture holds the right event number, the number of pulses seen and the
// nanoseconds since the last pulse (both inputs see the same synchroniser
// delay, so nsec is the true distance to the pulse edge, within +-1 for
// sampling), that nsec resets at each pulse, that a trigger inside the
// handshake window is counted as missed, that the busy input is recorded, and that sync_ok drops when the
// pulses stop.
module tb_timestamp_unit
  import cta_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam int NSP = 100;
  logic clk_ns = 0, rst_n = 0, pulse = 0, trig = 0, rec_ack = 0, busy = 0;
  logic rec_req, sync_ok;
  ts_record_t rec;
  timestamp_t now;
  int checks = 0, failures = 0;
  longint t_pulse[$];
  int npulse = 0;

  always #0.5 clk_ns = ~clk_ns;

  timestamp_unit #(.NS_PER_PULSE(NSP), .NS_TOLERANCE(8)) dut (
    .clk_ns, .rst_n, .usec_pulse_async(pulse), .trigger_async(trig), .busy_async(busy),
    .rec_ack, .rec_req, .rec, .sync_ok, .now
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // central clock: rising edge every NSP ns, 20 ns wide
  bit pulses_on = 1;
  initial begin
    #20.25;
    while (1) begin
      if (pulses_on) begin pulse = 1; t_pulse.push_back(longint'($realtime)); npulse++; end
      #20 pulse = 0;
      #(NSP - 20);
    end
  end

  // reading side: acknowledge each capture after a delay
  always @(rec_req) begin
    #15 rec_ack = rec_req;
  end

  task automatic fire(input real at_offset, input int exp_ev);
    longint t_trig;
    logic old_req;
    old_req = rec_req;
    trig = 1; t_trig = longint'($realtime);
    #10 trig = 0;
    wait (rec_req != old_req);
    #1;
    check(rec.busy == busy, $sformatf("busy flag %0b exp %0b", rec.busy, busy));
    check(rec.evnum == 32'(exp_ev), $sformatf("evnum %0d exp %0d", rec.evnum, exp_ev));
    check(rec.ts.usec == 48'(npulse_before(t_trig)), $sformatf("usec %0d exp %0d", rec.ts.usec, npulse_before(t_trig)));
    begin
      longint d = t_trig - t_pulse[npulse_before(t_trig) - 1];
      check(int'(rec.ts.nsec) >= int'(d) - 1 && int'(rec.ts.nsec) <= int'(d) + 1,
            $sformatf("nsec %0d exp ~%0d", rec.ts.nsec, d));
    end
  endtask

  function automatic int npulse_before(input longint t);
    int n = 0;
    foreach (t_pulse[i]) if (t_pulse[i] <= t) n++;
    return n;
  endfunction

  initial begin
    #5.25 rst_n = 1;
    #300;
    check(sync_ok, "sync_ok after pulses");
    fire(0, 0);
    #37;  fire(0, 1);
    busy = 1;
    #211; fire(0, 2);
    busy = 0;
    // nsec resets: just after a pulse, now.nsec is small
    wait (pulse == 1); #6;
    check(now.nsec <= 5, $sformatf("nsec reset at pulse: %0d", now.nsec));
    // second trigger inside the handshake window is missed
    begin
      logic old_req;
      old_req = rec_req;
      #13 trig = 1; #3 trig = 0; #3 trig = 1; #3 trig = 0;
      wait (rec_req != old_req); #40;
      check(rec.evnum == 32'd3, "first of pair captured");
      #60 fire(0, 5);
      check(rec.missed == 16'd1, $sformatf("missed count %0d", rec.missed));
    end
    // pulses stop: sync_ok must drop after NSP + tolerance
    pulses_on = 0;
    #(3 * NSP);
    check(!sync_ok, "sync_ok drops without pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
