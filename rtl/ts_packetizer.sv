// ts_packetizer: turns the oldest record of the time-stamp FIFO into a raw-
// Ethernet payload of TSTAMP_PAYLOAD_BYTES (big-endian):
//   byte 0 MSG_TSTAMP, byte 1 format version, bytes 2-3 node id,
//   bytes 4-7 event number, bytes 8-13 microsecond count,
//   bytes 14-15 nanoseconds since the last microsecond pulse,
//   bytes 16-17 triggers not time-stamped so far, bytes 18-19 FIFO overflows,
//   byte 20 flags (bit 0: camera busy when the trigger came).
// The MAC pads it to 46 bytes. The record is popped into a holding register
// at the MAC's start pulse; each rd is answered one cycle later from that
// register. The content (time stamp plus event number) follows the scheme;
// the layout is this design's.
module ts_packetizer
  import cta_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] node_id,
  input  logic [15:0] overflows,
  frame_src_if.src    fs,
  input  logic        fifo_empty,
  input  ts_record_t  fifo_head,
  output logic        fifo_pop
);
  ts_record_t  rec_q;
  logic        active;
  logic [7:0]  byte_q;
  logic [8*TSTAMP_PAYLOAD_BYTES-1:0] flat;

  assign fs.req   = !fifo_empty && !active;
  assign fs.len   = 16'(TSTAMP_PAYLOAD_BYTES);
  assign fifo_pop = fs.start;
  assign flat     = {MSG_TSTAMP, FORMAT_VERSION, node_id, rec_q.evnum, rec_q.ts.usec,
                     rec_q.ts.nsec, rec_q.missed, overflows, 7'b0, rec_q.busy};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rec_q <= '0; active <= 1'b0; byte_q <= '0;
    end else begin
      if (fs.start) begin rec_q <= fifo_head; active <= 1'b1; end
      else if (fs.done) active <= 1'b0;
      if (fs.rd) byte_q <= flat[8*(TSTAMP_PAYLOAD_BYTES-1-fs.idx[4:0]) +: 8];
    end

  assign fs.data = byte_q;
endmodule
