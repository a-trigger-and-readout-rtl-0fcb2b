// tb_eth_tx_mac: a testbench source offers frames of several lengths
// (including ones that need padding and a zero-length one) and answers
// every rd one cycle later. The GMII output is checked byte by byte:
// preamble/SFD, MAC header, payload, zero padding, FCS from the bit-serial
// reference CRC, the inter-frame gap, the frame length in cycles
// (8 + 14 + max(len,46) + 4 bytes with tx_en high), the start-to-tx_en
// latency of three cycles, and the standard CRC check value of "123456789".
module tb_eth_tx_mac
  import cta_pkg::*;
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  logic [7:0] txd;
  logic tx_en, busy;
  logic [31:0] frames_sent;
  int checks = 0, failures = 0;
  localparam logic [47:0] DST = 48'h0A0B0C0D0E0F, SRC = 48'h021122334455;

  frame_src_if fs ();
  always #4 clk = ~clk;

  eth_tx_mac dut (.clk, .rst_n, .fs(fs.mac), .dst_mac(DST), .src_mac(SRC), .ethertype(16'h88B5),
                  .gmii_txd(txd), .gmii_tx_en(tx_en), .busy, .frames_sent);

  // source
  int cur_len = 0, cur_seed = 0;
  bit have = 0;
  int starts = 0, rd_errors = 0, next_idx = 0;
  assign fs.req = have;
  assign fs.len = 16'(cur_len);
  function automatic logic [7:0] pbyte(input int seed, input int i);
    return 8'(seed * 13 + i * 7 + 1);
  endfunction
  always @(posedge clk) begin
    if (rst_n && fs.start) begin have <= 0; starts <= starts + 1; next_idx <= 0; end
    if (rst_n && fs.rd) begin
      fs.data <= pbyte(cur_seed, int'(fs.idx));
      if (int'(fs.idx) != next_idx || int'(fs.idx) >= cur_len) rd_errors <= rd_errors + 1;
      next_idx <= next_idx + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitor
  byte unsigned wire_q[$];
  int gap = 100, last_gap = 0, frames = 0, start_cyc = 0, cyc = 0, lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fs.start) start_cyc <= cyc;
    if (rst_n && tx_en) begin
      if (wire_q.size() == 0) begin last_gap = gap; lat = cyc - start_cyc; end
      wire_q.push_back(txd); gap = 0;
    end else gap++;
  end

  task automatic send_and_check(input int len, input int seed);
    bq_t pl, expq;
    @(negedge clk);
    cur_len = len; cur_seed = seed; have = 1;
    wait (wire_q.size() > 0);
    wait (!tx_en);
    @(negedge clk);
    for (int i = 0; i < len; i++) pl.push_back(pbyte(seed, i));
    expq = build_frame(DST, SRC, 16'h88B5, pl, 0);
    check(wire_q.size() == 8 + 14 + ((len < 46) ? 46 : len) + 4,
          $sformatf("len %0d: %0d bytes on wire", len, wire_q.size()));
    check(wire_q.size() == expq.size(), "size matches reference frame");
    begin
      int bad = 0;
      foreach (expq[i]) if (i < wire_q.size() && wire_q[i] != expq[i]) bad++;
      check(bad == 0, $sformatf("len %0d: %0d bytes differ", len, bad));
    end
    check(lat == 3, $sformatf("start to tx_en %0d cycles", lat));
    wire_q.delete();
  endtask

  initial begin
    bq_t kv;
    kv = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    check(ref_fcs(kv) == 32'hCBF43926, "reference CRC check value");
    begin
      logic [31:0] c = CRC_INIT;
      foreach (kv[i]) c = crc32_update(c, kv[i]);
      check(~c == 32'hCBF43926, "package CRC check value");
    end
    repeat (2) @(negedge clk); rst_n = 1;
    send_and_check(100, 1);
    send_and_check(10, 2);
    send_and_check(0, 3);
    send_and_check(46, 4);
    send_and_check(47, 5);
    // back-to-back: offer next frame immediately, gap must be >= 12
    @(negedge clk); cur_len = 60; cur_seed = 6; have = 1;
    wait (tx_en); wait (!tx_en);
    @(negedge clk); wire_q.delete(); cur_len = 60; cur_seed = 7; have = 1;
    wait (wire_q.size() > 74);
    check(last_gap >= IFG_BYTES, $sformatf("inter-frame gap %0d", last_gap));
    wait (!tx_en); @(negedge clk);
    check(rd_errors == 0, "payload reads in order and in range");
    check(frames_sent == 32'd7, $sformatf("frames_sent %0d", frames_sent));
    check(starts == 7, "one start per frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
