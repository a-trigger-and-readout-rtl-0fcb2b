// gmii_sink: testbench receiver for one GMII transmit link. It collects each
// frame (from tx_en rising to falling), checks preamble and SFD, the FCS with
// the bit-serial reference CRC, and the gap to the previous frame, and then
// pulses done with the frame bytes from the destination MAC up to (not
// including) the FCS in body[0 .. len-1].
module gmii_sink
  import tb_util_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  txd,
  input  logic        tx_en,
  output logic        done,
  output int          len,
  output logic [7:0]  body [2048],
  output logic        fcs_ok,
  output logic        pre_ok,
  output int          gap,
  output int          frames
);
  bq_t cur;
  int  idle = 1000;
  initial begin done = 0; len = 0; fcs_ok = 0; pre_ok = 0; gap = 0; frames = 0; end
  always @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      cur.delete();
      idle = 1000;
    end else if (tx_en) begin
      if (cur.size() == 0) gap <= idle;
      cur.push_back(txd);
      idle = 0;
    end else begin
      idle = idle + 1;
      if (cur.size() > 0) begin
        automatic bq_t b;
        automatic logic [31:0] f, got;
        automatic bit p = 1;
        for (int i = 0; i < 7; i++) if (cur[i] != 8'h55) p = 0;
        if (cur[7] != 8'hD5) p = 0;
        for (int i = 8; i < cur.size() - 4; i++) b.push_back(cur[i]);
        f   = ref_fcs(b);
        got = {cur[cur.size()-1], cur[cur.size()-2], cur[cur.size()-3], cur[cur.size()-4]};
        fcs_ok <= (f == got);
        pre_ok <= p;
        len    <= b.size();
        foreach (b[i]) body[i] <= b[i];
        done   <= 1'b1;
        frames <= frames + 1;
        cur.delete();
      end
    end
  end
endmodule
