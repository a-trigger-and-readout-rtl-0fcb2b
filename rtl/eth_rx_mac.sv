// eth_rx_mac: raw layer-2 Ethernet receive MAC on a GMII byte interface, used
// for the control direction of the full-duplex link. It waits for preamble
// and SFD, then counts frame bytes from the destination MAC to the end of the
// FCS. It keeps the frame when the destination is my_mac or broadcast, the
// EtherType matches, the frame has at least 64 bytes, rx_er never rose and
// the CRC over all bytes including the FCS leaves the standard residue
// 0xDEBB20E3. The first CMD_BYTES payload bytes of a kept frame are
// presented on cmd with a one-cycle cmd_valid in the cycle after rx_dv
// falls. Frames for other addresses or types are counted as filtered,
// corrupted ones as bad. The scheme uses the Ethernet link for control of
// the front end instead of a separate command bus; this MAC is this design's.
module eth_rx_mac
  import cta_pkg::*;
#(
  parameter logic [15:0] ETHERTYPE = ETHERTYPE_CTRL
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  gmii_rxd,
  input  logic        gmii_rx_dv,
  input  logic        gmii_rx_er,
  input  logic [47:0] my_mac,
  output logic        cmd_valid,
  output logic [7:0]  cmd [CMD_BYTES],
  output logic [31:0] frames_ok,
  output logic [31:0] frames_bad,
  output logic [31:0] frames_filtered
);
  typedef enum logic [1:0] {S_IDLE, S_PRE, S_DATA, S_DROP} state_e;
  state_e      state;
  logic [15:0] cnt;
  logic [31:0] crc;
  logic        addr_ok, bcast, type_ok, err;
  logic [7:0]  cmd_q [CMD_BYTES];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; crc <= CRC_INIT;
      addr_ok <= 1'b0; bcast <= 1'b0; type_ok <= 1'b0; err <= 1'b0;
      cmd_valid <= 1'b0; frames_ok <= '0; frames_bad <= '0; frames_filtered <= '0;
      for (int i = 0; i < CMD_BYTES; i++) begin cmd_q[i] <= '0; cmd[i] <= '0; end
    end else begin
      cmd_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (gmii_rx_dv) state <= (gmii_rxd == 8'h55) ? S_PRE : S_DROP;
        S_PRE: begin
          if (!gmii_rx_dv) state <= S_IDLE;
          else if (gmii_rxd == 8'hD5) begin
            state <= S_DATA; cnt <= '0; crc <= CRC_INIT;
            addr_ok <= 1'b1; bcast <= 1'b1; type_ok <= 1'b1; err <= 1'b0;
          end else if (gmii_rxd != 8'h55) state <= S_DROP;
        end
        S_DATA: begin
          if (gmii_rx_dv) begin
            crc <= crc32_update(crc, gmii_rxd);
            if (cnt != '1) cnt <= cnt + 1'b1;
            if (gmii_rx_er) err <= 1'b1;
            if (cnt < 16'd6) begin
              if (gmii_rxd != my_mac[8*(5-cnt[2:0]) +: 8]) addr_ok <= 1'b0;
              if (gmii_rxd != 8'hFF) bcast <= 1'b0;
            end
            if (cnt == 16'd12 && gmii_rxd != ETHERTYPE[15:8]) type_ok <= 1'b0;
            if (cnt == 16'd13 && gmii_rxd != ETHERTYPE[7:0])  type_ok <= 1'b0;
            for (int i = 0; i < CMD_BYTES; i++)
              if (cnt == 16'(14 + i)) cmd_q[i] <= gmii_rxd;
          end else begin
            state <= S_IDLE;
            if (err || cnt < 16'd64 || crc != CRC_RESIDUE) frames_bad <= frames_bad + 1'b1;
            else if (!(addr_ok || bcast) || !type_ok) frames_filtered <= frames_filtered + 1'b1;
            else begin
              frames_ok <= frames_ok + 1'b1;
              cmd_valid <= 1'b1;
              cmd       <= cmd_q;
            end
          end
        end
        S_DROP: if (!gmii_rx_dv) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
endmodule
