// interleaver: symbol interleaving of the two RS(31,27) codewords.
//
// The two 155-bit codewords of a frame are merged into one 310-bit word,
// alternating 5-bit symbols: A30, B30, A29, B29, ..., A0, B0 (Ad = symbol
// of degree d of code A; leftmost = bit 309 = first in time). A burst of
// up to 20 consecutive errored bits aligned to symbol boundaries then
// touches at most two symbols of each code, which RS(31,27) (t = 2)
// corrects.
//
// Timing: the result is registered on the clock edge with en high (the
// 10 MHz frame strobe) and held for the frame.
//
// The paper gives the 310-bit 10 MHz output and the 20-bit burst
// capability; symbol granularity and the order are this design's choices.
// The output register is triple-redundant.
module interleaver
  import rs_tx_pkg::*;
#(
  parameter bit TMR = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [CODE_W-1:0] code_a_i,
  input  logic [CODE_W-1:0] code_b_i,
  output logic [IL_W-1:0]   data_o
);

  logic [IL_W-1:0] il_d;
  logic            err_unused;

  always_comb begin
    for (int d = 0; d < RS_N; d++) begin
      il_d[2*SYM_W*d + SYM_W +: SYM_W] = code_a_i[SYM_W*d +: SYM_W];
      il_d[2*SYM_W*d         +: SYM_W] = code_b_i[SYM_W*d +: SYM_W];
    end
  end

  tmr_reg #(.WIDTH(IL_W), .TMR(TMR)) u_out (
    .clk(clk), .rst_n(rst_n), .en(en), .d(il_d), .q(data_o), .err(err_unused)
  );

endmodule
