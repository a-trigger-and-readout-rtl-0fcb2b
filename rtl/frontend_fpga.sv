// frontend_fpga: the FPGA that serves one group of pixels (16 by default).
// The camera trigger is synchronised and edge-detected; event_counter numbers
// every trigger and accepts it when the ADC controller is idle, the run is
// enabled and the multi-event buffer has a free slot. The ADC controller
// digitises all pixels into the buffer; the event packetizer and the transmit
// MAC send each buffered event as one raw-Ethernet frame (EtherType
// ETHERTYPE_DAQ) to the camera computer, whose MAC address is a register.
// The receive MAC and config_regs take control frames (ETHERTYPE_CTRL) on
// the same full-duplex link. The board's own MAC is MAC_PREFIX, 0x00,
// board_id. busy is high while a trigger would be lost.
// Timing: trigger to first adc_req 3 cycles (two synchroniser flops, then
// the state change). A 16x15-word event is a 522-byte frame (8 preamble/SFD,
// 14 header, 496 payload, 4 FCS); with the 12-byte gap and one idle cycle
// the link carries one event every 535 cycles at 125 MHz (4.28 us).
// The partition into FPGA, ADCs, Ethernet switch and camera computer
// follows the readout scheme; the internal structure is this design's.
module frontend_fpga
  import cta_pkg::*;
#(
  parameter int unsigned NUM_PIXELS      = NUM_PIXELS_DEF,
  parameter int unsigned WORDS_PER_PIXEL = WORDS_PER_PIXEL_DEF,
  parameter int unsigned NUM_SLOTS       = 16,
  parameter int unsigned SLOT_WORDS      = 256
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [15:0]                        board_id,
  input  logic                               camera_trigger,
  // ADC / analogue pipeline
  output logic                               adc_req,
  output logic [$clog2(NUM_PIXELS)-1:0]      adc_pixel,
  output logic [$clog2(WORDS_PER_PIXEL)-1:0] adc_sample,
  input  logic                               adc_ack,
  input  logic [15:0]                        adc_data,
  // GMII to the PHY
  output logic [7:0]                         gmii_txd,
  output logic                               gmii_tx_en,
  input  logic [7:0]                         gmii_rxd,
  input  logic                               gmii_rx_dv,
  input  logic                               gmii_rx_er,
  // front-end settings and status
  output logic [31:0]                        settings [NUM_REGS-REG_SETTINGS],
  output logic                               busy,
  output logic [31:0]                        lost_triggers,
  output logic [31:0]                        frames_sent
);
  localparam int unsigned WW = $clog2(SLOT_WORDS);

  logic        trig_s, trig_d, trig_edge;
  logic        run_enable, ready, accepted;
  logic [31:0] evnum;
  logic [47:0] dst_mac, src_mac;
  logic        buf_full, buf_empty, wr_en, commit, release_slot;
  logic [WW-1:0] wr_addr, rd_addr;
  logic [15:0] wr_data, rd_data;
  logic [63:0] commit_hdr, rd_hdr;
  logic [$clog2(NUM_SLOTS):0] used;
  logic        cmd_valid;
  logic [7:0]  cmd [CMD_BYTES];
  logic [31:0] cmd_count, cmd_errors, rx_ok, rx_bad, rx_filt;

  frame_src_if fs ();

  assign src_mac = {MAC_PREFIX, 8'h00, board_id};

  bit_sync #(.STAGES(2)) u_sync_trig (.clk, .rst_n, .d(camera_trigger), .q(trig_s));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) trig_d <= 1'b0; else trig_d <= trig_s;
  assign trig_edge = trig_s && !trig_d;

  event_counter #(.EV_W(32), .LOST_W(32)) u_evc (
    .clk, .rst_n, .trig(trig_edge), .accept_ok(ready),
    .accepted, .evnum, .lost(lost_triggers)
  );

  assign busy = !ready;

  adc_readout_ctrl #(
    .NUM_PIXELS(NUM_PIXELS), .WORDS_PER_PIXEL(WORDS_PER_PIXEL), .SLOT_WORDS(SLOT_WORDS), .HDR_W(64)
  ) u_adc (
    .clk, .rst_n, .run_enable, .buf_full, .ready,
    .start(accepted), .start_hdr({evnum, lost_triggers}),
    .adc_req, .adc_pixel, .adc_sample, .adc_ack, .adc_data,
    .wr_en, .wr_addr, .wr_data, .commit, .commit_hdr
  );

  multi_event_buffer #(
    .NUM_SLOTS(NUM_SLOTS), .SLOT_WORDS(SLOT_WORDS), .WORD_W(16), .HDR_W(64)
  ) u_buf (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .commit, .commit_hdr, .full(buf_full),
    .empty(buf_empty), .rd_hdr, .rd_addr, .rd_data, .release_slot, .used
  );

  event_packetizer #(
    .NUM_PIXELS(NUM_PIXELS), .WORDS_PER_PIXEL(WORDS_PER_PIXEL), .SLOT_WORDS(SLOT_WORDS)
  ) u_pkt (
    .clk, .rst_n, .board_id, .fs(fs.src),
    .buf_empty, .buf_hdr(rd_hdr), .buf_rd_addr(rd_addr), .buf_rd_data(rd_data),
    .buf_release(release_slot)
  );

  eth_tx_mac u_tx (
    .clk, .rst_n, .fs(fs.mac), .dst_mac, .src_mac, .ethertype(ETHERTYPE_DAQ),
    .gmii_txd, .gmii_tx_en, .busy(), .frames_sent
  );

  eth_rx_mac #(.ETHERTYPE(ETHERTYPE_CTRL)) u_rx (
    .clk, .rst_n, .gmii_rxd, .gmii_rx_dv, .gmii_rx_er, .my_mac(src_mac),
    .cmd_valid, .cmd, .frames_ok(rx_ok), .frames_bad(rx_bad), .frames_filtered(rx_filt)
  );

  config_regs u_cfg (
    .clk, .rst_n, .cmd_valid, .cmd, .run_enable, .dst_mac, .settings, .cmd_count, .cmd_errors
  );
endmodule
