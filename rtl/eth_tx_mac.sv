// eth_tx_mac: raw layer-2 Ethernet transmit MAC on a GMII byte interface
// (8 bits per 125 MHz cycle = 1 Gbit/s). For each frame a source offers on
// its frame_src_if it sends 7 preamble bytes 0x55, the SFD 0xD5, destination
// MAC, source MAC, EtherType, the payload (read from the source one byte per
// cycle), zero padding up to 46 payload bytes, the CRC-32 frame check
// sequence (low byte first) and then holds tx_en low for the 12-byte
// inter-frame gap. Pipeline: stage 0 chooses each byte and issues the
// payload read, stage 1 merges the payload byte returned one cycle later and
// updates the CRC, and the GMII outputs are registered, so tx_en rises three
// cycles after start. The scheme relies on a standard Ethernet MAC inside the
// FPGA; this is a minimal one written for it (no half duplex, no pause
// frames, no VLAN).
module eth_tx_mac
  import cta_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  frame_src_if.mac    fs,
  input  logic [47:0] dst_mac,
  input  logic [47:0] src_mac,
  input  logic [15:0] ethertype,
  output logic [7:0]  gmii_txd,
  output logic        gmii_tx_en,
  output logic        busy,
  output logic [31:0] frames_sent
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_HDR, S_PAY, S_FCS, S_IFG} state_e;
  typedef enum logic [1:0] {K_CONST, K_PAY, K_FCS} kind_e;

  state_e      state;
  logic [15:0] cnt, len_q, plen;
  logic [47:0] dst_q, src_q;
  logic [15:0] type_q;

  // stage 0 outputs
  logic        s0_en, s0_crc;
  kind_e       s0_kind;
  logic [7:0]  s0_byte;
  // stage 1 registers
  logic        s1_en, s1_crc;
  kind_e       s1_kind;
  logic [7:0]  s1_byte;
  logic [1:0]  s1_fidx;
  logic [31:0] crc;
  logic [7:0]  b1;

  assign plen = (len_q < 16'(MIN_PAYLOAD)) ? 16'(MIN_PAYLOAD) : len_q;
  assign busy = (state != S_IDLE);

  always_comb begin
    s0_en = 1'b0; s0_crc = 1'b0; s0_kind = K_CONST; s0_byte = 8'h00;
    fs.start = 1'b0; fs.rd = 1'b0; fs.idx = cnt; fs.done = 1'b0;
    unique case (state)
      S_IDLE: fs.start = fs.req;
      S_PRE: begin
        s0_en = 1'b1; s0_byte = (cnt == 16'd7) ? 8'hD5 : 8'h55;
      end
      S_HDR: begin
        s0_en = 1'b1; s0_crc = 1'b1;
        if (cnt < 16'd6)       s0_byte = dst_q[8*(5-cnt[2:0]) +: 8];
        else if (cnt < 16'd12) s0_byte = src_q[8*(11-cnt[3:0]) +: 8];
        else                   s0_byte = (cnt == 16'd12) ? type_q[15:8] : type_q[7:0];
      end
      S_PAY: begin
        s0_en = 1'b1; s0_crc = 1'b1;
        if (cnt < len_q) begin s0_kind = K_PAY; fs.rd = 1'b1; end
        fs.done = (cnt == plen - 1'b1);
      end
      S_FCS: begin s0_en = 1'b1; s0_kind = K_FCS; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; len_q <= '0; dst_q <= '0; src_q <= '0; type_q <= '0;
      frames_sent <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (fs.req) begin
          len_q <= fs.len; dst_q <= dst_mac; src_q <= src_mac; type_q <= ethertype;
          cnt <= '0; state <= S_PRE;
        end
        S_PRE: if (cnt == 16'd7)  begin cnt <= '0; state <= S_HDR; end else cnt <= cnt + 1'b1;
        S_HDR: if (cnt == 16'd13) begin cnt <= '0; state <= S_PAY; end else cnt <= cnt + 1'b1;
        S_PAY: if (cnt == plen - 1'b1) begin cnt <= '0; state <= S_FCS; end else cnt <= cnt + 1'b1;
        S_FCS: if (cnt == 16'd3)  begin
          cnt <= '0; state <= S_IFG; frames_sent <= frames_sent + 1'b1;
        end else cnt <= cnt + 1'b1;
        S_IFG: if (cnt == 16'(IFG_BYTES - 1)) begin cnt <= '0; state <= S_IDLE; end
               else cnt <= cnt + 1'b1;
        default: state <= S_IDLE;
      endcase
    end

  // stage 1
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      s1_en <= 1'b0; s1_crc <= 1'b0; s1_kind <= K_CONST; s1_byte <= '0; s1_fidx <= '0;
    end else begin
      s1_en <= s0_en; s1_crc <= s0_crc; s1_kind <= s0_kind; s1_byte <= s0_byte;
      s1_fidx <= cnt[1:0];
    end

  always_comb begin
    unique case (s1_kind)
      K_PAY:   b1 = fs.data;
      K_FCS:   b1 = ~crc[8*s1_fidx +: 8];
      default: b1 = s1_byte;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      crc <= CRC_INIT; gmii_txd <= '0; gmii_tx_en <= 1'b0;
    end else begin
      if (s1_en && s1_kind == K_CONST && !s1_crc) crc <= CRC_INIT;
      else if (s1_crc) crc <= crc32_update(crc, b1);
      gmii_txd   <= s1_en ? b1 : 8'h00;
      gmii_tx_en <= s1_en;
    end
endmodule
