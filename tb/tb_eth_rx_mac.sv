// tb_eth_rx_mac: sends frames built with the reference CRC into the receive
// MAC: good frames to its own and to the broadcast address, a frame with a
// corrupted FCS, one with rx_er, one for another MAC, one of another
// EtherType and a short one. Checks that only good frames deliver their
// command bytes (one cycle after rx_dv falls) and that the counters of good,
// bad and filtered frames match.
module tb_eth_rx_mac
  import cta_pkg::*;
  import tb_util_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  localparam logic [47:0] ME = 48'h024354000007, PC = 48'h001122334455;
  logic clk = 0, rst_n = 0;
  logic [7:0] rxd = 0;
  logic rx_dv = 0, rx_er = 0;
  logic cmd_valid;
  logic [7:0] cmd [CMD_BYTES];
  logic [31:0] ok, bad, filt;
  int checks = 0, failures = 0, nvalid = 0;
  logic [7:0] last_cmd [CMD_BYTES];

  always #4 clk = ~clk;

  eth_rx_mac dut (.clk, .rst_n, .gmii_rxd(rxd), .gmii_rx_dv(rx_dv), .gmii_rx_er(rx_er), .my_mac(ME),
                  .cmd_valid, .cmd, .frames_ok(ok), .frames_bad(bad), .frames_filtered(filt));

  always @(posedge clk) if (rst_n && cmd_valid) begin nvalid <= nvalid + 1; last_cmd <= cmd; end

  task automatic check(input bit ok_, input string what);
    checks++;
    if (!ok_) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input bq_t f, input int er_at);
    foreach (f[i]) begin
      @(negedge clk); rx_dv = 1; rxd = f[i]; rx_er = (i == er_at);
    end
    @(negedge clk); rx_dv = 0; rxd = 0; rx_er = 0;
    repeat (14) @(negedge clk);
  endtask

  function automatic bq_t cmdpl(input int k);
    bq_t p;
    p = '{8'h01, 8'(k), 8'hDE, 8'hAD, 8'(k), 8'h5A};
    return p;
  endfunction

  initial begin
    bq_t f;
    repeat (2) @(negedge clk); rst_n = 1;
    send(build_frame(ME, PC, ETHERTYPE_CTRL, cmdpl(4), 0), -1);
    check(nvalid == 1 && ok == 1, "good frame accepted");
    check(last_cmd[0] == 8'h01 && last_cmd[1] == 8'd4 && last_cmd[2] == 8'hDE &&
          last_cmd[4] == 8'd4 && last_cmd[5] == 8'h5A, "command bytes");
    send(build_frame(48'hFFFFFFFFFFFF, PC, ETHERTYPE_CTRL, cmdpl(5), 0), -1);
    check(nvalid == 2 && last_cmd[1] == 8'd5, "broadcast accepted");
    send(build_frame(ME, PC, ETHERTYPE_CTRL, cmdpl(6), 1), -1);
    check(nvalid == 2 && bad == 1, "bad FCS rejected");
    send(build_frame(ME, PC, ETHERTYPE_CTRL, cmdpl(7), 0), 30);
    check(nvalid == 2 && bad == 2, "rx_er rejected");
    send(build_frame(48'h024354000008, PC, ETHERTYPE_CTRL, cmdpl(8), 0), -1);
    check(nvalid == 2 && filt == 1, "other MAC filtered");
    send(build_frame(ME, PC, 16'h0800, cmdpl(9), 0), -1);
    check(nvalid == 2 && filt == 2, "other EtherType filtered");
    f = build_frame(ME, PC, ETHERTYPE_CTRL, cmdpl(10), 0);
    f = f[0:40];
    send(f, -1);
    check(nvalid == 2 && bad == 3, "short frame rejected");
    send(build_frame(ME, PC, ETHERTYPE_CTRL, cmdpl(11), 0), -1);
    check(nvalid == 3 && ok == 3 && last_cmd[1] == 8'd11, "good frame after errors");
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
