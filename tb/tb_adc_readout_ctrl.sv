// tb_adc_readout_ctrl: connects the controller to the ADC model and a
// reference copy of the buffer's write port. For each event started it
// checks the words written at pixel*WORDS_PER_PIXEL + sample against the
// model's formula, the committed header, the number of cycles from start to
// commit (one word per LAT+1 cycles), that ready is low while digitising,
// and that a full buffer or a disabled run holds ready low.
module tb_adc_readout_ctrl
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam int NP = 4, WPP = 3, LAT = 2, SW = 16;
  logic clk = 0, rst_n = 0;
  logic run_enable = 1, buf_full = 0, start = 0;
  logic ready;
  logic [63:0] start_hdr = 0, commit_hdr;
  logic adc_req, adc_ack;
  logic [1:0] adc_pixel, adc_sample;
  logic [15:0] adc_data, wr_data;
  logic wr_en, commit;
  logic [3:0] wr_addr;
  int ev_done;
  int checks = 0, failures = 0;
  logic [15:0] mem [SW];
  int nwrites = 0;

  always #4 clk = ~clk;

  adc_readout_ctrl #(.NUM_PIXELS(NP), .WORDS_PER_PIXEL(WPP), .SLOT_WORDS(SW)) dut (
    .clk, .rst_n, .run_enable, .buf_full, .ready, .start, .start_hdr,
    .adc_req, .adc_pixel, .adc_sample, .adc_ack, .adc_data,
    .wr_en, .wr_addr, .wr_data, .commit, .commit_hdr
  );

  adc_model #(.NUM_PIXELS(NP), .WORDS_PER_PIXEL(WPP), .LAT(LAT)) u_adc (
    .clk, .rst_n, .board(3), .adc_req, .adc_pixel, .adc_sample, .adc_ack, .adc_data, .events_done(ev_done)
  );

  always @(posedge clk) if (wr_en) begin mem[wr_addr] <= wr_data; nwrites <= nwrites + 1; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_event(input int ev);
    int cyc = 0;
    int w0;
    w0 = nwrites;
    @(negedge clk);
    check(ready, "ready before start");
    start = 1; start_hdr = {32'(ev + 100), 32'(ev)};
    @(negedge clk); start = 0; start_hdr = '0;
    check(!ready, "busy while digitising");
    while (!commit) begin @(negedge clk); cyc++; end
    check(commit_hdr == {32'(ev + 100), 32'(ev)}, "committed header");
    check(nwrites - w0 == NP * WPP, $sformatf("words written %0d", nwrites - w0));
    check(cyc == NP * WPP * (LAT + 1), $sformatf("cycles start->commit %0d", cyc));
    @(negedge clk);
    for (int p = 0; p < NP; p++)
      for (int s = 0; s < WPP; s++)
        check(mem[p * WPP + s] == adc_word(3, ev, p, s), $sformatf("ev %0d pix %0d smp %0d", ev, p, s));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_event(0);
    run_event(1);
    buf_full = 1; @(negedge clk); check(!ready, "not ready when buffer full");
    buf_full = 0; run_enable = 0; @(negedge clk); check(!ready, "not ready when run disabled");
    run_enable = 1;
    run_event(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
