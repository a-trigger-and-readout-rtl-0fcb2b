// frame_src_if: the bundle between a payload source and eth_tx_mac.
// The source raises req with the payload length; the MAC answers with a
// one-cycle start pulse when it begins the frame. During the payload the MAC
// pulses rd with a byte index and expects that byte on data in the next
// cycle; done marks the cycle of the last payload read. The MAC reads one
// byte per cycle and never pauses inside a frame, so the source must answer
// every rd with fixed one-cycle latency.
interface frame_src_if;
  logic        req;
  logic [15:0] len;
  logic        start;
  logic        rd;
  logic [15:0] idx;
  logic [7:0]  data;
  logic        done;
  modport mac (input req, len, data, output start, rd, idx, done);
  modport src (output req, len, data, input start, rd, idx, done);
endinterface
