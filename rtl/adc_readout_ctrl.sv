// adc_readout_ctrl: controls the digitisation of one board's pixels. When an
// accepted trigger arrives (start, with the event's header) it steps through
// pixel 0..NUM_PIXELS-1 and sample 0..WORDS_PER_PIXEL-1, asks the ADC for
// each word (adc_req held with adc_pixel/adc_sample until adc_ack returns
// adc_data) and writes the word to the free slot of the multi-event buffer
// at address pixel*WORDS_PER_PIXEL + sample. After the last word it commits
// the slot. ready is high only while idle; a trigger at any other time is
// lost (dead time). This fits a slow ADC reading an analogue pipeline as well
// as an FADC that returns stored samples on request. The paper gives the
// function (FPGA controls the digitisation and writes a multi-event buffer)
// and 30 bytes per pixel; the request/acknowledge handshake is this design's.
module adc_readout_ctrl #(
  parameter int unsigned NUM_PIXELS      = 16,
  parameter int unsigned WORDS_PER_PIXEL = 15,
  parameter int unsigned SLOT_WORDS      = 256,
  parameter int unsigned HDR_W           = 64
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                run_enable,
  input  logic                                buf_full,
  output logic                                ready,
  input  logic                                start,
  input  logic [HDR_W-1:0]                    start_hdr,
  // ADC
  output logic                                adc_req,
  output logic [$clog2(NUM_PIXELS)-1:0]       adc_pixel,
  output logic [$clog2(WORDS_PER_PIXEL)-1:0]  adc_sample,
  input  logic                                adc_ack,
  input  logic [15:0]                         adc_data,
  // multi-event buffer
  output logic                                wr_en,
  output logic [$clog2(SLOT_WORDS)-1:0]       wr_addr,
  output logic [15:0]                         wr_data,
  output logic                                commit,
  output logic [HDR_W-1:0]                    commit_hdr
);
  typedef enum logic [1:0] {S_IDLE, S_CONV, S_COMMIT} state_e;
  state_e state;
  logic [HDR_W-1:0] hdr_q;
  logic last_word;

  initial if (NUM_PIXELS * WORDS_PER_PIXEL > SLOT_WORDS)
    $error("adc_readout_ctrl: event does not fit in a buffer slot");

  assign ready      = (state == S_IDLE) && run_enable && !buf_full;
  assign adc_req    = (state == S_CONV);
  assign last_word  = (adc_pixel == $bits(adc_pixel)'(NUM_PIXELS-1)) &&
                      (adc_sample == $bits(adc_sample)'(WORDS_PER_PIXEL-1));
  assign wr_en      = (state == S_CONV) && adc_ack;
  assign wr_data    = adc_data;
  assign commit     = (state == S_COMMIT);
  assign commit_hdr = hdr_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; hdr_q <= '0; adc_pixel <= '0; adc_sample <= '0; wr_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && ready) begin
          hdr_q <= start_hdr; adc_pixel <= '0; adc_sample <= '0; wr_addr <= '0;
          state <= S_CONV;
        end
        S_CONV: if (adc_ack) begin
          wr_addr <= wr_addr + 1'b1;
          if (last_word) state <= S_COMMIT;
          else if (adc_sample == $bits(adc_sample)'(WORDS_PER_PIXEL-1)) begin
            adc_sample <= '0;
            adc_pixel  <= adc_pixel + 1'b1;
          end else adc_sample <= adc_sample + 1'b1;
        end
        S_COMMIT: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end

  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);
endmodule
