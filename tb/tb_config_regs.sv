// tb_config_regs: issues write commands to every register, invalid opcodes,
// an out-of-range address and a write to the read-only counter, and checks
// reset values, run_enable, dst_mac, the settings outputs, the command
// counter and the error counter.
module tb_config_regs
  import cta_pkg::*;
;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  logic [7:0] cmd [CMD_BYTES];
  logic run_enable;
  logic [47:0] dst_mac;
  logic [31:0] settings [NUM_REGS-REG_SETTINGS];
  logic [31:0] cmd_count, cmd_errors;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  config_regs dut (.clk, .rst_n, .cmd_valid, .cmd, .run_enable, .dst_mac, .settings, .cmd_count, .cmd_errors);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(input logic [7:0] op, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cmd[0] = op; cmd[1] = a; {cmd[2], cmd[3], cmd[4], cmd[5]} = d; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < CMD_BYTES; i++) cmd[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(run_enable == 1, "run enabled after reset");
    check(dst_mac == 48'hFFFFFFFFFFFF, "broadcast destination after reset");
    check(cmd_count == 0 && cmd_errors == 0, "counters zero");
    issue(CMD_WRITE, 8'(REG_DMAC_HI), 32'h0000_0011);
    issue(CMD_WRITE, 8'(REG_DMAC_LO), 32'h2233_4455);
    check(dst_mac == 48'h001122334455, "dst_mac written");
    for (int r = REG_SETTINGS; r < NUM_REGS; r++) issue(CMD_WRITE, 8'(r), 32'h1000 + 32'(r));
    for (int r = REG_SETTINGS; r < NUM_REGS; r++)
      check(settings[r - REG_SETTINGS] == 32'h1000 + 32'(r), $sformatf("setting %0d", r));
    issue(CMD_WRITE, 8'(REG_CTRL), 32'h0);
    check(run_enable == 0, "run disabled");
    check(cmd_count == 32'(3 + NUM_REGS - REG_SETTINGS), $sformatf("command count %0d", cmd_count));
    issue(8'h07, 8'(REG_CTRL), 32'h1);
    check(run_enable == 0 && cmd_errors == 1, "unknown opcode ignored");
    issue(CMD_WRITE, 8'(NUM_REGS), 32'h1);
    check(cmd_errors == 2, "out-of-range address rejected");
    issue(CMD_WRITE, 8'(REG_CMDCOUNT), 32'h0);
    check(cmd_errors == 3 && cmd_count != 0, "read-only counter kept");
    issue(CMD_WRITE, 8'(REG_CTRL), 32'h1);
    check(run_enable == 1, "run enabled again");
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
