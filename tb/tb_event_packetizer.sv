// tb_event_packetizer: a testbench buffer model (registered read, header per
// event) holds three events; a MAC emulator takes each frame the way the
// transmit MAC does (start, then one rd per cycle, done on the last). Checks
// req, len, every header byte of the documented layout, every sample byte
// (high byte first), and that done releases exactly one event.
module tb_event_packetizer
  import cta_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam int NP = 2, WPP = 3, SW = 8;
  localparam int LEN = EVENT_HDR_BYTES + 2 * NP * WPP;
  logic clk = 0, rst_n = 0;
  logic buf_empty;
  logic [63:0] buf_hdr;
  logic [2:0] rd_addr;
  logic [15:0] rd_data;
  logic rel;
  int checks = 0, failures = 0;
  int head = 0, tail = 3, releases = 0;

  frame_src_if fs ();
  always #4 clk = ~clk;

  event_packetizer #(.NUM_PIXELS(NP), .WORDS_PER_PIXEL(WPP), .SLOT_WORDS(SW)) dut (
    .clk, .rst_n, .board_id(16'hB00C), .fs(fs.src),
    .buf_empty, .buf_hdr, .buf_rd_addr(rd_addr), .buf_rd_data(rd_data), .buf_release(rel)
  );

  function automatic logic [15:0] w(input int ev, input int a);
    return 16'(16'hA100 + ev * 16 + a);
  endfunction
  assign buf_empty = (head == tail);
  assign buf_hdr   = {32'(head + 40), 32'(head * 2)};
  always @(posedge clk) begin
    rd_data <= w(head, int'(rd_addr));
    if (rel) begin head <= head + 1; releases <= releases + 1; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    fs.start = 0; fs.rd = 0; fs.idx = 0; fs.done = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int ev = 0; ev < 3; ev++) begin
      logic [7:0] got [LEN];
      logic [7:0] expv [LEN];
      @(negedge clk);
      check(fs.req, "req with events buffered");
      check(int'(fs.len) == LEN, $sformatf("len %0d", fs.len));
      expv[0] = MSG_EVENT; expv[1] = FORMAT_VERSION; expv[2] = 8'hB0; expv[3] = 8'h0C;
      {expv[4], expv[5], expv[6], expv[7]}   = 32'(ev + 40);
      {expv[8], expv[9], expv[10], expv[11]} = 32'(ev * 2);
      expv[12] = 8'(NP); expv[13] = 8'(WPP); expv[14] = 0; expv[15] = 0;
      for (int a = 0; a < NP * WPP; a++) {expv[16 + 2*a], expv[17 + 2*a]} = w(ev, a);
      fs.start = 1;
      @(negedge clk); fs.start = 0;
      check(!fs.req, "req drops while frame active");
      repeat (5) @(negedge clk);
      for (int i = 0; i <= LEN; i++) begin
        if (i > 0) got[i-1] = fs.data;
        fs.rd = (i < LEN); fs.idx = 16'(i); fs.done = (i == LEN - 1);
        @(negedge clk);
      end
      fs.rd = 0; fs.done = 0;
      for (int i = 0; i < LEN; i++)
        check(got[i] == expv[i], $sformatf("event %0d byte %0d: %h exp %h", ev, i, got[i], expv[i]));
      check(releases == ev + 1, "one release per frame");
      repeat (3) @(negedge clk);
    end
    check(!fs.req && buf_empty, "no req when buffer empty");
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
