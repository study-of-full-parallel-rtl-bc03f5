// scrambler: 270-bit parallel self-synchronous scrambler, 1 + x^39 + x^58.
//
// Scrambles the sensor data of one frame (270 bits, bit 269 first in time)
// for DC balance before the RS encoders. Bit t of the scrambled stream is
//     s[t] = d[t] ^ s[t-TAP_A] ^ s[t-TAP_B]
// over the continuous stream of sensor bits of consecutive frames. The
// whole frame is computed in one clock: the always_comb block unrolls the
// recursion over 270 bits, starting from the last TAP_B scrambled bits of
// the previous frame (hist_q). A receiver descrambles with
//     d[t] = s[t] ^ s[t-TAP_A] ^ s[t-TAP_B]
// and synchronises itself after TAP_B bits, so it needs no seed.
//
// Timing: data_i is sampled on the clock edge with en high (once per
// 10 MHz frame); data_o is the registered result, valid after that edge.
// Reset sets the history to all ones.
//
// The paper says only that the sensor data is scrambled for DC balance.
// The polynomial (the 64b/66b one), the self-synchronous form and the bit
// order are this design's choices. State registers are triple-redundant.
module scrambler #(
  parameter int unsigned DATA_W = 270,
  parameter int unsigned TAP_A  = 39,
  parameter int unsigned TAP_B  = 58,
  parameter bit          TMR    = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [DATA_W-1:0] data_i,
  output logic [DATA_W-1:0] data_o
);

  logic [TAP_B-1:0]  hist_q, hist_d;   // hist_q[0] = most recent scrambled bit
  logic [DATA_W-1:0] scr_d;
  logic              err_hist_unused, err_out_unused;

  always_comb begin
    automatic logic [TAP_B+DATA_W-1:0] s = '0;  // s[TAP_B+t]: scrambled bit t of this frame
    for (int j = 0; j < TAP_B; j++)
      s[j] = hist_q[TAP_B-1-j];
    for (int t = 0; t < DATA_W; t++)
      s[TAP_B+t] = data_i[DATA_W-1-t] ^ s[TAP_B+t-TAP_A] ^ s[t];
    for (int t = 0; t < DATA_W; t++)
      scr_d[DATA_W-1-t] = s[TAP_B+t];
    for (int i = 0; i < TAP_B; i++)
      hist_d[i] = s[TAP_B+DATA_W-1-i];
  end

  tmr_reg #(.WIDTH(TAP_B), .TMR(TMR), .RESET_VAL({TAP_B{1'b1}})) u_hist (
    .clk(clk), .rst_n(rst_n), .en(en), .d(hist_d), .q(hist_q), .err(err_hist_unused)
  );

  tmr_reg #(.WIDTH(DATA_W), .TMR(TMR)) u_out (
    .clk(clk), .rst_n(rst_n), .en(en), .d(scr_d), .q(data_o), .err(err_out_unused)
  );

endmodule
