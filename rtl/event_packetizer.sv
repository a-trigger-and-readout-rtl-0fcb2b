// event_packetizer: serves the oldest event of the multi-event buffer to the
// transmit MAC as one raw-Ethernet payload. Payload layout (big-endian):
//   byte 0     MSG_EVENT          byte 1      format version
//   bytes 2-3  board id           bytes 4-7   event number
//   bytes 8-11 triggers lost before this event
//   byte 12    pixels             byte 13     words per pixel
//   bytes 14-15 zero, then NUM_PIXELS*WORDS_PER_PIXEL 16-bit samples,
//   pixel-major, high byte first.
// Timing: req is high while the buffer holds an event and no frame is being
// sent. For each rd the header byte or the buffer word is fetched in the same
// cycle (the buffer read is registered) and the byte appears on data one
// cycle later. The slot is released at done. The paper asks for event
// markers on the data; the layout is this design's.
module event_packetizer
  import cta_pkg::*;
#(
  parameter int unsigned NUM_PIXELS      = 16,
  parameter int unsigned WORDS_PER_PIXEL = 15,
  parameter int unsigned SLOT_WORDS      = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [15:0]                   board_id,
  frame_src_if.src                      fs,
  // multi-event buffer read side
  input  logic                          buf_empty,
  input  logic [63:0]                   buf_hdr,   // {event number, lost count}
  output logic [$clog2(SLOT_WORDS)-1:0] buf_rd_addr,
  input  logic [15:0]                   buf_rd_data,
  output logic                          buf_release
);
  localparam int unsigned PAYLOAD = EVENT_HDR_BYTES + 2 * NUM_PIXELS * WORDS_PER_PIXEL;

  logic        active;
  logic        is_hdr_q, lo_q;
  logic [7:0]  hdr_byte_q;
  logic [7:0]  hdr_byte;
  logic [15:0] word_idx;

  assign fs.req      = !buf_empty && !active;
  assign fs.len      = 16'(PAYLOAD);
  assign buf_release = fs.done;
  assign word_idx    = (fs.idx - 16'(EVENT_HDR_BYTES)) >> 1;
  assign buf_rd_addr = $bits(buf_rd_addr)'(word_idx);

  always_comb begin
    unique case (fs.idx[3:0])
      4'd0:  hdr_byte = MSG_EVENT;
      4'd1:  hdr_byte = FORMAT_VERSION;
      4'd2:  hdr_byte = board_id[15:8];
      4'd3:  hdr_byte = board_id[7:0];
      4'd4:  hdr_byte = buf_hdr[63:56];
      4'd5:  hdr_byte = buf_hdr[55:48];
      4'd6:  hdr_byte = buf_hdr[47:40];
      4'd7:  hdr_byte = buf_hdr[39:32];
      4'd8:  hdr_byte = buf_hdr[31:24];
      4'd9:  hdr_byte = buf_hdr[23:16];
      4'd10: hdr_byte = buf_hdr[15:8];
      4'd11: hdr_byte = buf_hdr[7:0];
      4'd12: hdr_byte = 8'(NUM_PIXELS);
      4'd13: hdr_byte = 8'(WORDS_PER_PIXEL);
      default: hdr_byte = 8'h00;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      active <= 1'b0; is_hdr_q <= 1'b0; lo_q <= 1'b0; hdr_byte_q <= '0;
    end else begin
      if (fs.start) active <= 1'b1;
      else if (fs.done) active <= 1'b0;
      if (fs.rd) begin
        is_hdr_q   <= fs.idx < 16'(EVENT_HDR_BYTES);
        lo_q       <= fs.idx[0];
        hdr_byte_q <= hdr_byte;
      end
    end

  assign fs.data = is_hdr_q ? hdr_byte_q : (lo_q ? buf_rd_data[7:0] : buf_rd_data[15:8]);
endmodule
