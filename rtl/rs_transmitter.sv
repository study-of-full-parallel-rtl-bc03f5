// rs_transmitter: RS(31,27)-protected 3.2 Gb/s serial transmitter.
//
// Sensor data, 270 bits per 100 ns frame, is scrambled for DC balance,
// split into two 135-bit halves that two full parallel RS(31,27) encoders
// turn into 155-bit codewords, symbol-interleaved into 310 bits, given a
// 10-bit header by the frame builder and sent as ten 32-bit words at
// 100 MHz to a DDR serializer clocked at 1.6 GHz: 320 bits per 100 ns,
// 3.2 Gb/s on ser_o.
//
//   sensor_data_i -> scrambler -> rs_encoder (x2) -> interleaver
//                 -> frame_builder -> serializer -> ser_o
//
// Clocking: clk_ser (1.6 GHz) is the only clock input. The serializer
// divides it by 16 into the 100 MHz word clock (clk_word_o), which clocks
// every other block. The frame builder's frame strobe (data_req_o, one word
// cycle in ten) is the 10 MHz frame rate: the scrambler, encoders and
// interleaver load on word clock edges where it is high.
//
// Interface: sensor_data_i (bit 269 first in time; bits [269:135] go to
// encoder 1, [134:0] to encoder 2) is sampled on the rising clk_word_o edge
// at the end of a cycle with data_req_o high. Scrambler, encoders and
// interleaver each hold a frame for one 100 ns frame period; the header of
// the frame carrying the data starts on ser_o 3 x 160 + 8 serial cycles
// after the sampling edge, and the frame lasts 160 serial cycles.
//
// The block chain, the widths and the clock rates follow the paper; the
// clock-enable scheme and every choice listed in the blocks are this
// design's. All state registers are triple-redundant (tmr_reg).
module rs_transmitter
  import rs_tx_pkg::*;
(
  input  logic              clk_ser,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] sensor_data_i,
  output logic              data_req_o,
  output logic              clk_word_o,
  output logic              ser_o
);

  logic              clk_word;
  logic              frame_strobe;
  logic [DATA_W-1:0] scr_data;
  logic [CODE_W-1:0] code_a, code_b;
  logic [IL_W-1:0]   il_data;
  logic [WORD_W-1:0] word;
  logic              sof_unused;

  scrambler #(.DATA_W(DATA_W)) u_scrambler (
    .clk(clk_word), .rst_n(rst_n), .en(frame_strobe),
    .data_i(sensor_data_i), .data_o(scr_data)
  );

  rs_encoder u_encoder1 (
    .clk(clk_word), .rst_n(rst_n), .en(frame_strobe),
    .info_i(scr_data[DATA_W-1 -: INFO_W]), .codeword_o(code_a)
  );

  rs_encoder u_encoder2 (
    .clk(clk_word), .rst_n(rst_n), .en(frame_strobe),
    .info_i(scr_data[INFO_W-1:0]), .codeword_o(code_b)
  );

  interleaver u_interleaver (
    .clk(clk_word), .rst_n(rst_n), .en(frame_strobe),
    .code_a_i(code_a), .code_b_i(code_b), .data_o(il_data)
  );

  frame_builder u_frame_builder (
    .clk(clk_word), .rst_n(rst_n), .data_i(il_data),
    .frame_strobe_o(frame_strobe), .word_o(word), .sof_o(sof_unused)
  );

  serializer #(.WORD_W(WORD_W)) u_serializer (
    .clk_ser(clk_ser), .rst_n(rst_n), .word_i(word),
    .clk_word_o(clk_word), .ser_o(ser_o)
  );

  assign data_req_o = frame_strobe;
  assign clk_word_o = clk_word;

endmodule
