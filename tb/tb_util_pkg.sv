// tb_util_pkg: reference functions for the testbenches, written apart from
// the RTL: a bit-serial Ethernet CRC-32, a frame builder for the control
// direction and the formula of the samples the ADC model returns.
package tb_util_pkg;

  typedef byte unsigned bq_t[$];

  // Bit-serial CRC-32 as in IEEE 802.3: LSB first, init all ones, final inversion
  function automatic logic [31:0] ref_fcs(input bq_t q);
    logic [31:0] r;
    logic fb;
    r = 32'hFFFF_FFFF;
    foreach (q[i])
      for (int b = 0; b < 8; b++) begin
        fb = r[0] ^ q[i][b];
        r  = {1'b0, r[31:1]};
        if (fb) r = r ^ 32'hEDB8_8320;
      end
    return ~r;
  endfunction

  // Whole frame on the wire: preamble, SFD, header, payload padded to 46, FCS
  function automatic bq_t build_frame(input logic [47:0] dst, input logic [47:0] src,
                                      input logic [15:0] etype, input bq_t payload,
                                      input bit corrupt_fcs);
    bq_t body, wire_q;
    logic [31:0] f;
    for (int i = 5; i >= 0; i--) body.push_back(dst[8*i +: 8]);
    for (int i = 5; i >= 0; i--) body.push_back(src[8*i +: 8]);
    body.push_back(etype[15:8]);
    body.push_back(etype[7:0]);
    foreach (payload[i]) body.push_back(payload[i]);
    while (body.size() < 60) body.push_back(8'h00);
    f = ref_fcs(body);
    if (corrupt_fcs) f = f ^ 32'h0000_0100;
    for (int i = 0; i < 7; i++) wire_q.push_back(8'h55);
    wire_q.push_back(8'hD5);
    foreach (body[i]) wire_q.push_back(body[i]);
    for (int i = 0; i < 4; i++) wire_q.push_back(f[8*i +: 8]);
    return wire_q;
  endfunction

  // Sample returned by adc_model for (board, event sequence, pixel, sample)
  function automatic logic [15:0] adc_word(input int board, input int ev, input int pix, input int smp);
    return 16'(board * 4099 + ev * 257 + pix * 31 + smp * 7 + 16'h1234);
  endfunction

endpackage
