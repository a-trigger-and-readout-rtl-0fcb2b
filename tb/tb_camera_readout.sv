// tb_camera_readout: end-to-end run of the camera readout with a reduced
// number of boards and buffer slots. Every board has an ADC model and a GMII
// receiver; the time-stamp node has one too; together they stand in for the
// Ethernet switch and the camera computer. The testbench merges fragments by
// event number like the camera computer would, and checks each data frame
// in full (FCS, header, all samples) and each time stamp.
// Mechanisms made to happen and counted (a failure if one never happens):
//   complete   an event received from every board plus its time stamp
//   busy_lost  a trigger lost by a board while it digitised
//   full       a board's multi-event buffer full
//   run_off    triggers lost while the run was disabled by a control frame
//   setting    a front-end setting written over Ethernet
//   bad_ctrl   a control frame with a bad FCS ignored
//   dead_stamp a time stamp for a trigger that the boards lost (dead time)
//   busy_flag  such a time stamp carries the camera-busy flag
//   ts_ovf     the time-stamp FIFO overflowing in a trigger burst
//   usec_step  the microsecond count advancing between stamps
//   padded     a short time-stamp frame padded to the minimum length
module tb_camera_readout
  import cta_pkg::*;
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam int NB = 4, NP = 16, WPP = 15, NSLOT = 2, LAT = 1;
  localparam logic [47:0] PC = 48'h00AABBCCDDEE;
  `include "camera_bench_body.svh"

  camera_readout #(.NUM_BOARDS(NB), .NUM_SLOTS(NSLOT)) dut (
    .clk_eth, .clk_ns, .rst_n, .camera_trigger(trig), .usec_pulse(pulse),
    .adc_req, .adc_pixel, .adc_sample, .adc_ack, .adc_data,
    .gmii_txd, .gmii_tx_en, .gmii_rxd, .gmii_rx_dv, .gmii_rx_er,
    .settings, .board_busy, .lost_triggers,
    .ts_gmii_txd, .ts_gmii_tx_en, .ts_gmii_rxd, .ts_gmii_rx_dv, .ts_gmii_rx_er,
    .sync_ok, .ts_overflows, .camera_busy
  );

  initial begin
    #20 rst_n = 1;
    #2500;
    check(sync_ok, "sync_ok");
    // isolated events
    for (int i = 0; i < 3; i++) begin fire(); #8000; end
    // setting and a corrupted control frame to every board
    for (int b = 0; b < NB; b++) send_ctrl(b, 8'(REG_SETTINGS), 32'h0ABC_0000 + 32'(b), 0);
    for (int b = 0; b < NB; b++) send_ctrl(b, 8'(REG_SETTINGS), 32'hFFFF_FFFF, 1);
    // run disabled on all boards: triggers lost, but time-stamped
    for (int b = 0; b < NB; b++) send_ctrl(b, 8'(REG_CTRL), 32'h0, 0);
    fire(); #8000; fire(); #8000;
    for (int b = 0; b < NB; b++) send_ctrl(b, 8'(REG_CTRL), 32'h1, 0);
    // triggers faster than the link: busy losses and full buffers
    for (int i = 0; i < 30; i++) begin fire(); #(($urandom_range(0, 5) == 0) ? 800 : 3950); end
    // burst faster than the time-stamp link: FIFO overflow
    for (int i = 0; i < 24; i++) begin fire(); #100; end
    #80000;
    finish_checks(1);
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
