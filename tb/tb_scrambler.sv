// tb_scrambler: checks the parallel scrambler against a bit-serial model
// over 300 frames loaded at random enable times, that the output holds
// while en is low, and that a bit-serial descrambler recovers the data.
module tb_scrambler;
  import rs_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [269:0] d, q, exp_q;
  logic [57:0] hist_tx, hist_rx;
  int checks = 0, failures = 0;

  scrambler dut (.clk(clk), .rst_n(rst_n), .en(en), .data_i(d), .data_o(q));

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    hist_tx = '1;   // reset state of the scrambler history
    hist_rx = '1;   // descrambler starts in the same state
    exp_q = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 300; f++) begin
      // a few idle cycles, then one frame
      repeat ($urandom % 3) begin
        @(negedge clk);
        checks++;
        if (q !== exp_q) begin failures++; $display("output changed while idle"); end
      end
      @(negedge clk);
      d  = (f % 50 == 0) ? '0 : rand270();
      en = 1'b1;
      exp_q = scramble(d, hist_tx);
      @(negedge clk);
      en = 1'b0;
      checks++;
      if (q !== exp_q) begin
        failures++;
        $display("frame %0d: got %h exp %h", f, q, exp_q);
      end
      checks++;
      if (descramble(q, hist_rx) !== d) begin
        failures++;
        $display("frame %0d: descrambled data differs", f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
