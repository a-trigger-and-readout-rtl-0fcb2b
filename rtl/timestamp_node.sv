// timestamp_node: the camera's "nsec clock / usec count" unit. Its
// timestamp_unit runs on the local ~1 GHz clock, is re-synchronised by the
// central microsecond pulse and captures {usec, nsec}, the event number
// and the camera busy state on every camera trigger. This wrapper, on the
// 125 MHz Ethernet clock, completes the toggle handshake (synchronise
// rec_req, copy the record that is held stable meanwhile, return rec_ack),
// queues records in a FIFO of FIFO_DEPTH and sends one raw-Ethernet frame
// (MSG_TSTAMP, see ts_packetizer) per trigger to the camera computer, which
// forwards the time stamps to the central trigger computer. Control frames
// set the destination MAC as on a front-end board. A record that finds the
// FIFO full is dropped and counted. Timing: rec_ack returns 3-4 Ethernet
// cycles plus 2 local cycles after a capture, which is the shortest trigger
// spacing that is still time-stamped. The scheme gives the counter reset and pulse counting
// and that the stamp is sent over Ethernet; the crossing, FIFO and frame are
// this design's.
module timestamp_node
  import cta_pkg::*;
#(
  parameter int unsigned NS_PER_PULSE = 1000,
  parameter int unsigned FIFO_DEPTH   = 16
) (
  input  logic        clk,       // Ethernet clock
  input  logic        clk_ns,    // local ~1 GHz clock
  input  logic        rst_n,
  input  logic [15:0] node_id,
  input  logic        usec_pulse,
  input  logic        camera_trigger,
  input  logic        camera_busy,     // any front-end board busy
  output logic [7:0]  gmii_txd,
  output logic        gmii_tx_en,
  input  logic [7:0]  gmii_rxd,
  input  logic        gmii_rx_dv,
  input  logic        gmii_rx_er,
  output logic        sync_ok,
  output logic [15:0] overflows,
  output logic [31:0] frames_sent
);
  logic        rec_req, rec_ack, req_s, sync_ok_ns;
  ts_record_t  rec, head;
  timestamp_t  now;
  logic        fifo_push, fifo_pop, fifo_empty, fifo_full;
  logic [47:0] dst_mac, src_mac;
  logic        run_enable, cmd_valid;
  logic [7:0]  cmd [CMD_BYTES];
  logic [31:0] settings [NUM_REGS-REG_SETTINGS];
  logic [31:0] cmd_count, cmd_errors, rx_ok, rx_bad, rx_filt;

  frame_src_if fs ();

  assign src_mac = {MAC_PREFIX, 8'h00, node_id};

  timestamp_unit #(.NS_PER_PULSE(NS_PER_PULSE)) u_ts (
    .clk_ns, .rst_n, .usec_pulse_async(usec_pulse), .trigger_async(camera_trigger),
    .busy_async(camera_busy),
    .rec_ack, .rec_req, .rec, .sync_ok(sync_ok_ns), .now
  );

  bit_sync #(.STAGES(2)) u_sync_req (.clk, .rst_n, .d(rec_req),    .q(req_s));
  bit_sync #(.STAGES(2)) u_sync_ok  (.clk, .rst_n, .d(sync_ok_ns), .q(sync_ok));

  assign fifo_push = (req_s != rec_ack) && run_enable;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rec_ack <= 1'b0; overflows <= '0;
    end else if (req_s != rec_ack) begin
      rec_ack <= req_s;
      if (fifo_full && run_enable) overflows <= overflows + 1'b1;
    end

  sync_fifo #(.WIDTH($bits(ts_record_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(fifo_push), .din(rec), .pop(fifo_pop),
    .head, .empty(fifo_empty), .full(fifo_full)
  );

  ts_packetizer u_pkt (
    .clk, .rst_n, .node_id, .overflows, .fs(fs.src),
    .fifo_empty, .fifo_head(head), .fifo_pop
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
