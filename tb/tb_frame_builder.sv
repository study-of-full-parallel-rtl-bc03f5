// tb_frame_builder: checks 40 frames word by word: header, data order,
// the 10-cycle frame strobe period, the start-of-frame flag, and that the
// data captured is the value held in the strobe cycle.
module tb_frame_builder;
  import rs_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [309:0] d;
  logic strobe, sof;
  logic [31:0] word;
  logic [319:0] cur, nxt;
  int checks = 0, failures = 0, frames = 0, k = 0;

  frame_builder dut (.clk(clk), .rst_n(rst_n), .data_i(d), .frame_strobe_o(strobe),
                     .word_o(word), .sof_o(sof));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = {rand270()[39:0], rand270()};
    cur = {10'b0011111010, 310'b0};
    nxt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    #1;
    while (frames < 40) begin
      checks++;
      if (sof !== (k == 0) || strobe !== (k == 9)) begin
        failures++;
        $display("frame %0d word %0d: sof=%b strobe=%b", frames, k, sof, strobe);
      end
      checks++;
      if (word !== cur[319 - 32*k -: 32]) begin
        failures++;
        $display("frame %0d word %0d: got %h exp %h", frames, k, word, cur[319 - 32*k -: 32]);
      end
      if (k == 9) nxt = {10'b0011111010, d};
      if (k == 0 && frames > 0) d = {rand270()[39:0], rand270()};  // upstream changes after the strobe edge
      if (k == 9) begin cur = nxt; frames++; end
      k = (k + 1) % 10;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
