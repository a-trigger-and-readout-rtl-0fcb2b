// tb_camera_full: the camera readout at its default size (120 front-end
// boards of 16 pixels, 16 buffer slots each, and the time-stamp node) taken
// through complete events: four triggers, each digitised by all 120 boards,
// sent as 120 data frames plus one time-stamp frame, all checked in full and
// merged by event number; then a short burst that makes boards lose
// triggers while their time stamps are still recorded.
module tb_camera_full
  import cta_pkg::*;
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam int NB = 120, NP = 16, WPP = 15, LAT = 1;
  localparam logic [47:0] PC = 48'h00AABBCCDDEE;
  `include "camera_bench_body.svh"

  camera_readout dut (
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
    for (int i = 0; i < 4; i++) begin fire(); #6000; end
    check(!camera_busy, "camera idle between events");
    fire(); #500; fire(); #500; fire();
    #20000;
    check(n_complete_now() == 5, $sformatf("complete events %0d", n_complete_now()));
    finish_checks(0);
  end

  function automatic int n_complete_now();
    int n = 0;
    foreach (frag_count[e]) if (frag_count[e] == NB && stamped.exists(e)) n++;
    return n;
  endfunction

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
