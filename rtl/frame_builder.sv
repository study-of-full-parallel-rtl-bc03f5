// frame_builder: 320-bit frame assembly and 320-to-32 bit width conversion.
//
// A frame is the 10-bit header followed by the 310 interleaved RS bits:
//     frame = {HEADER, data_i}      (bit 319 first in time)
// It is sent as ten 32-bit words at the 100 MHz word clock, word 0 =
// frame[319:288] (header and the first 22 data bits). A word counter runs
// 0..9; in the cycle it holds 9, frame_strobe_o is high and the next frame
// is captured from data_i at the end of that cycle. frame_strobe_o is the
// 10 MHz frame rate of the transmitter: every 10 MHz register upstream is
// loaded on the same edge, so the frame builder captures the value the
// interleaver held for the whole past frame.
//
// Timing: word_o and sof_o are driven from registers and change on the
// rising clock edge; sof_o marks word 0. After reset the first frame is the
// header followed by zeros.
//
// The paper gives the 10-bit header, the 320-bit frame and the 32-bit
// 100 MHz output; the header value (a K28.5 comma by default), the bit order
// and the clock-enable scheme are this design's choices. Counter and frame
// registers are triple-redundant.
module frame_builder
  import rs_tx_pkg::*;
#(
  parameter logic [HEADER_W-1:0] HDR = HEADER,
  parameter bit                  TMR = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [IL_W-1:0]   data_i,
  output logic              frame_strobe_o,
  output logic [WORD_W-1:0] word_o,
  output logic              sof_o
);

  localparam int unsigned CNT_W = $clog2(WORDS_PER_FRAME);
  localparam logic [CNT_W-1:0] LAST = CNT_W'(WORDS_PER_FRAME - 1);

  logic [CNT_W-1:0]   cnt_q, cnt_d;
  logic [FRAME_W-1:0] frame_q;
  logic               err_cnt_unused, err_frame_unused;

  assign cnt_d          = (cnt_q == LAST) ? '0 : cnt_q + 1'b1;
  assign frame_strobe_o = (cnt_q == LAST);
  assign sof_o          = (cnt_q == '0);
  assign word_o         = frame_q[FRAME_W - 1 - WORD_W*cnt_q -: WORD_W];

  tmr_reg #(.WIDTH(CNT_W), .TMR(TMR)) u_cnt (
    .clk(clk), .rst_n(rst_n), .en(1'b1), .d(cnt_d), .q(cnt_q), .err(err_cnt_unused)
  );

  tmr_reg #(.WIDTH(FRAME_W), .TMR(TMR), .RESET_VAL({HDR, {IL_W{1'b0}}})) u_frame (
    .clk(clk), .rst_n(rst_n), .en(frame_strobe_o), .d({HDR, data_i}), .q(frame_q),
    .err(err_frame_unused)
  );

endmodule
