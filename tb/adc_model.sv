// adc_model: behavioural model of the digitiser behind one front-end board
// (an analogue pipeline with a slow ADC, or an FADC). It answers each held
// adc_req after LAT cycles with a one-cycle adc_ack and the word
// tb_util_pkg::adc_word(BOARD, event, pixel, sample), where event counts the
// events it has fully delivered. Not synthesizable logic of the design; it
// stands in for the analogue front end in the testbenches.
module adc_model
  import tb_util_pkg::*;
#(
  parameter int NUM_PIXELS      = 16,
  parameter int WORDS_PER_PIXEL = 15,
  parameter int LAT             = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  int          board,
  input  logic        adc_req,
  input  logic [$clog2(NUM_PIXELS)-1:0]      adc_pixel,
  input  logic [$clog2(WORDS_PER_PIXEL)-1:0] adc_sample,
  output logic        adc_ack,
  output logic [15:0] adc_data,
  output int          events_done
);
  int cnt = 0;
  initial begin adc_ack = 1'b0; adc_data = '0; events_done = 0; end
  always @(posedge clk) begin
    adc_ack <= 1'b0;
    if (rst_n && adc_req && !adc_ack) begin
      if (cnt >= LAT - 1) begin
        cnt      <= 0;
        adc_ack  <= 1'b1;
        adc_data <= adc_word(board, events_done, int'(adc_pixel), int'(adc_sample));
        if (int'(adc_pixel) == NUM_PIXELS - 1 && int'(adc_sample) == WORDS_PER_PIXEL - 1)
          events_done <= events_done + 1;
      end else cnt <= cnt + 1;
    end
  end
endmodule
