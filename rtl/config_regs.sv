// config_regs: the front end's parameter registers, written over the same
// Ethernet link that carries the data. A command is CMD_BYTES bytes:
// opcode, register address, 32-bit value (big-endian). CMD_WRITE to an
// address below NUM_REGS, other than the read-only command counter, writes
// the register; anything else is counted in cmd_errors. Map:
//   0 control (bit 0 run enable, reset 1)
//   1 destination MAC [47:32], 2 destination MAC [31:0] (reset: broadcast)
//   3 accepted-command counter (read-only)
//   4..15 settings for the analogue front end (HV, trigger thresholds,
//         digitisation), brought out on settings[]
// Writes take effect the cycle after cmd_valid. The scheme names what is to
// be controlled (HV supplies, trigger and digitisation settings); opcodes and
// map are this design's.
module config_regs
  import cta_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic [7:0]  cmd [CMD_BYTES],
  output logic        run_enable,
  output logic [47:0] dst_mac,
  output logic [31:0] settings [NUM_REGS-REG_SETTINGS],
  output logic [31:0] cmd_count,
  output logic [31:0] cmd_errors
);
  logic [31:0] regs [NUM_REGS];
  logic [31:0] wdata;
  logic        wr_ok;

  assign wdata = {cmd[2], cmd[3], cmd[4], cmd[5]};
  assign wr_ok = (cmd[0] == CMD_WRITE) && (cmd[1] < 8'(NUM_REGS)) && (cmd[1] != 8'(REG_CMDCOUNT));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) regs[i] <= '0;
      regs[REG_CTRL]    <= 32'h1;
      regs[REG_DMAC_HI] <= 32'h0000_FFFF;
      regs[REG_DMAC_LO] <= 32'hFFFF_FFFF;
      cmd_errors <= '0;
    end else if (cmd_valid) begin
      if (wr_ok) begin
        regs[cmd[1][$clog2(NUM_REGS)-1:0]] <= wdata;
        regs[REG_CMDCOUNT] <= regs[REG_CMDCOUNT] + 1'b1;
      end else cmd_errors <= cmd_errors + 1'b1;
    end

  assign run_enable = regs[REG_CTRL][0];
  assign dst_mac    = {regs[REG_DMAC_HI][15:0], regs[REG_DMAC_LO]};
  assign cmd_count  = regs[REG_CMDCOUNT];
  always_comb for (int i = 0; i < NUM_REGS - REG_SETTINGS; i++) settings[i] = regs[REG_SETTINGS + i];
endmodule
