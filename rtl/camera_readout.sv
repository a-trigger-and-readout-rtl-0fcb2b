// camera_readout: the Ethernet-based front-end readout of one camera.
// NUM_BOARDS front-end FPGAs (120 x 16 = 1920 pixels by default, the ~2000
// pixel camera of the scheme) and one time-stamp node share the camera
// trigger. Each board and the node has its own Gbit Ethernet link (GMII
// ports here; PHYs, the Ethernet switch and the camera computer are outside
// this RTL). Each board numbers triggers locally, so the event number in its
// data frames matches the one in the node's time-stamp frames and the camera
// computer can merge the fragments. Board i has board id i and MAC
// MAC_PREFIX:00:i; the node has id TS_NODE_ID. camera_busy is high while
// any board would lose a trigger. Clocks: clk_eth 125 MHz for all boards
// and the node's Ethernet side, clk_ns ~1 GHz for the node's time counter.
module camera_readout
  import cta_pkg::*;
#(
  parameter int unsigned NUM_BOARDS      = 120,
  parameter int unsigned NUM_PIXELS      = NUM_PIXELS_DEF,
  parameter int unsigned WORDS_PER_PIXEL = WORDS_PER_PIXEL_DEF,
  parameter int unsigned NUM_SLOTS       = 16,
  parameter int unsigned SLOT_WORDS      = 256,
  parameter int unsigned NS_PER_PULSE    = 1000,
  parameter logic [15:0] TS_NODE_ID      = 16'h0100
) (
  input  logic                               clk_eth,
  input  logic                               clk_ns,
  input  logic                               rst_n,
  input  logic                               camera_trigger,
  input  logic                               usec_pulse,
  // ADCs of every board
  output logic                               adc_req    [NUM_BOARDS],
  output logic [$clog2(NUM_PIXELS)-1:0]      adc_pixel  [NUM_BOARDS],
  output logic [$clog2(WORDS_PER_PIXEL)-1:0] adc_sample [NUM_BOARDS],
  input  logic                               adc_ack    [NUM_BOARDS],
  input  logic [15:0]                        adc_data   [NUM_BOARDS],
  // Ethernet links of every board
  output logic [7:0]                         gmii_txd   [NUM_BOARDS],
  output logic                               gmii_tx_en [NUM_BOARDS],
  input  logic [7:0]                         gmii_rxd   [NUM_BOARDS],
  input  logic                               gmii_rx_dv [NUM_BOARDS],
  input  logic                               gmii_rx_er [NUM_BOARDS],
  output logic [31:0]                        settings   [NUM_BOARDS][NUM_REGS-REG_SETTINGS],
  output logic                               board_busy [NUM_BOARDS],
  output logic [31:0]                        lost_triggers [NUM_BOARDS],
  // time-stamp node link
  output logic [7:0]                         ts_gmii_txd,
  output logic                               ts_gmii_tx_en,
  input  logic [7:0]                         ts_gmii_rxd,
  input  logic                               ts_gmii_rx_dv,
  input  logic                               ts_gmii_rx_er,
  output logic                               sync_ok,
  output logic [15:0]                        ts_overflows,
  output logic                               camera_busy
);
  logic [31:0] frames_sent [NUM_BOARDS];
  logic [31:0] ts_frames_sent;
  logic [NUM_BOARDS-1:0] busy_vec;

  for (genvar b = 0; b < NUM_BOARDS; b++) begin : g_board
    frontend_fpga #(
      .NUM_PIXELS(NUM_PIXELS), .WORDS_PER_PIXEL(WORDS_PER_PIXEL),
      .NUM_SLOTS(NUM_SLOTS), .SLOT_WORDS(SLOT_WORDS)
    ) u_fe (
      .clk(clk_eth), .rst_n, .board_id(16'(b)), .camera_trigger,
      .adc_req(adc_req[b]), .adc_pixel(adc_pixel[b]), .adc_sample(adc_sample[b]),
      .adc_ack(adc_ack[b]), .adc_data(adc_data[b]),
      .gmii_txd(gmii_txd[b]), .gmii_tx_en(gmii_tx_en[b]),
      .gmii_rxd(gmii_rxd[b]), .gmii_rx_dv(gmii_rx_dv[b]), .gmii_rx_er(gmii_rx_er[b]),
      .settings(settings[b]), .busy(board_busy[b]), .lost_triggers(lost_triggers[b]),
      .frames_sent(frames_sent[b])
    );
    assign busy_vec[b] = board_busy[b];
  end

  assign camera_busy = |busy_vec;

  timestamp_node #(.NS_PER_PULSE(NS_PER_PULSE)) u_tsn (
    .clk(clk_eth), .clk_ns, .rst_n, .node_id(TS_NODE_ID), .usec_pulse, .camera_trigger, .camera_busy,
    .gmii_txd(ts_gmii_txd), .gmii_tx_en(ts_gmii_tx_en),
    .gmii_rxd(ts_gmii_rxd), .gmii_rx_dv(ts_gmii_rx_dv), .gmii_rx_er(ts_gmii_rx_er),
    .sync_ok, .overflows(ts_overflows), .frames_sent(ts_frames_sent)
  );
endmodule
