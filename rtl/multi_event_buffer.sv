// multi_event_buffer: the front-end FPGA's multi-event buffer. The RAM is cut
// into NUM_SLOTS slots of SLOT_WORDS 16-bit words; each slot holds one event.
// The ADC controller fills the slot at the write pointer word by word and
// then commits it together with its header (event number, lost-trigger
// count). The packetizer reads the oldest committed slot with a registered
// (one-cycle) read and releases it when it is sent. full stops the ADC
// controller from accepting further triggers (the board is busy). The
// readout scheme names the buffer; slot organisation, depth and the
// one-cycle read are this design's choices (a block-RAM with an output
// register).
module multi_event_buffer #(
  parameter int unsigned NUM_SLOTS  = 16,
  parameter int unsigned SLOT_WORDS = 256,
  parameter int unsigned WORD_W     = 16,
  parameter int unsigned HDR_W      = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // write side (ADC controller)
  input  logic                          wr_en,
  input  logic [$clog2(SLOT_WORDS)-1:0] wr_addr,
  input  logic [WORD_W-1:0]             wr_data,
  input  logic                          commit,
  input  logic [HDR_W-1:0]              commit_hdr,
  output logic                          full,
  // read side (packetizer)
  output logic                          empty,
  output logic [HDR_W-1:0]              rd_hdr,
  input  logic [$clog2(SLOT_WORDS)-1:0] rd_addr,
  output logic [WORD_W-1:0]             rd_data,
  input  logic                          release_slot,
  output logic [$clog2(NUM_SLOTS):0]    used
);
  localparam int unsigned SW = $clog2(NUM_SLOTS);
  localparam int unsigned WW = $clog2(SLOT_WORDS);

  logic [WORD_W-1:0] mem [NUM_SLOTS*SLOT_WORDS];
  logic [HDR_W-1:0]  hdr [NUM_SLOTS];
  logic [SW-1:0]     wr_slot, rd_slot;
  logic              do_commit, do_release;

  assign full       = (used == (SW+1)'(NUM_SLOTS));
  assign empty      = (used == '0);
  assign do_commit  = commit && !full;
  assign do_release = release_slot && !empty;
  assign rd_hdr     = hdr[rd_slot];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[{wr_slot, wr_addr}] <= wr_data;
    rd_data <= mem[{rd_slot, rd_addr}];
  end

  always_ff @(posedge clk) if (do_commit) hdr[wr_slot] <= commit_hdr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wr_slot <= '0; rd_slot <= '0; used <= '0;
    end else begin
      if (do_commit)  wr_slot <= wr_slot + 1'b1;
      if (do_release) rd_slot <= rd_slot + 1'b1;
      used <= used + (SW+1)'(do_commit) - (SW+1)'(do_release);
    end

  // Rules of the two sides
  a_no_commit_full:   assert property (@(posedge clk) disable iff (!rst_n) commit |-> !full);
  a_no_release_empty: assert property (@(posedge clk) disable iff (!rst_n) release_slot |-> !empty);

  initial begin
    if ((1 << SW) != NUM_SLOTS || (1 << WW) != SLOT_WORDS)
      $error("multi_event_buffer: NUM_SLOTS and SLOT_WORDS must be powers of two");
  end
endmodule
