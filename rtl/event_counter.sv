// event_counter: gives every camera trigger an event number. The front-end
// FPGAs and the time-stamp node all see the same camera trigger, so counting
// it locally tags each board's data with the same marker, which the camera
// computer uses to merge the fragments of an event (the readout scheme's
// "event count"). A trigger arriving while the owner cannot take it
// (accept_ok low: readout running, buffer full, run disabled) still uses up
// its number and is counted in lost, so missing numbers and the lost count
// give the dead time. Interface: trig is a one-cycle pulse; in that same cycle
// accepted pulses if accept_ok, with evnum the number of this trigger and
// lost the triggers lost before it. First trigger after reset is number 0.
module event_counter #(
  parameter int unsigned EV_W   = 32,
  parameter int unsigned LOST_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic              accept_ok,
  output logic              accepted,
  output logic [EV_W-1:0]   evnum,
  output logic [LOST_W-1:0] lost
);
  logic [EV_W-1:0] next_num;

  assign accepted = trig && accept_ok;
  assign evnum    = next_num;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      next_num <= '0;
      lost     <= '0;
    end else if (trig) begin
      next_num <= next_num + 1'b1;
      if (!accept_ok) lost <= lost + 1'b1;
    end
endmodule
