// bit_sync: multi-flop synchroniser for asynchronous single-bit inputs
// (camera trigger, central microsecond pulse, handshake toggles). Output
// follows the input after STAGES clock edges. Design choice, not from the
// readout scheme, which only says the signals are shared between boards.
module bit_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic [STAGES-1:0] sr;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sr <= '0;
    else        sr <= {sr[STAGES-2:0], d};
  assign q = sr[STAGES-1];
endmodule
