// serializer: 32-bit to 1-bit double-data-rate serializer, 1.6 GHz clock.
//
// Turns the 32-bit, 100 MHz word stream into a 3.2 Gb/s serial stream:
// two bits per cycle of the 1.6 GHz serial clock, one while clk_ser is high
// and the next while it is low. It also makes the word clock: a 4-bit
// counter divides clk_ser by 16 and its MSB is clk_word_o (rising when the
// counter goes from 7 to 8).
//
// Datapath: on the clk_ser edge where the counter wraps (15 -> 0) the word
// is taken from word_i, eight serial cycles after the word clock edge that
// changed it, so word_i is stable. Each rising edge moves the next bit pair
// into q_rise and q_fall_pre and shifts the rest two places; q_fall_pre is
// retimed to the falling edge (q_fall), and ser_o = clk_ser ? q_rise :
// q_fall. Bit 31 of a word leaves first. A word appears on ser_o starting
// one serial cycle after it was loaded, so it occupies serial cycles 1..16
// after the load edge.
//
// The paper gives the 32-bit input, the 1.6 GHz clock and the DDR output;
// the internals are the simplest structure with that function. In silicon
// the clock-selected output multiplexer is a custom high-speed cell. The
// divider counter is triple-redundant; the shift register is reloaded every
// 10 ns and is not.
module serializer #(
  parameter int unsigned WORD_W = 32,
  parameter bit          TMR    = 1'b1
) (
  input  logic              clk_ser,
  input  logic              rst_n,
  input  logic [WORD_W-1:0] word_i,
  output logic              clk_word_o,
  output logic              ser_o
);

  localparam int unsigned DIV   = WORD_W / 2;   // serial cycles per word
  localparam int unsigned CNT_W = $clog2(DIV);

  logic [CNT_W-1:0]  cnt_q;
  logic              load;
  logic [WORD_W-3:0] sr_q;
  logic              q_rise, q_fall_pre, q_fall;
  logic              err_unused;

  tmr_reg #(.WIDTH(CNT_W), .TMR(TMR)) u_div (
    .clk(clk_ser), .rst_n(rst_n), .en(1'b1), .d(cnt_q + 1'b1), .q(cnt_q), .err(err_unused)
  );

  assign clk_word_o = cnt_q[CNT_W-1];
  assign load       = (cnt_q == CNT_W'(DIV - 1));

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      sr_q       <= '0;
      q_rise     <= 1'b0;
      q_fall_pre <= 1'b0;
    end else if (load) begin
      {q_rise, q_fall_pre, sr_q} <= word_i;
    end else begin
      {q_rise, q_fall_pre, sr_q} <= {sr_q, 2'b00};
    end
  end

  always_ff @(negedge clk_ser or negedge rst_n) begin
    if (!rst_n) q_fall <= 1'b0;
    else        q_fall <= q_fall_pre;
  end

  assign ser_o = clk_ser ? q_rise : q_fall;

endmodule
