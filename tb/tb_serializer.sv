// tb_serializer: drives a new random 32-bit word on every rising edge of
// the divided word clock, samples ser_o in the middle of each high and low
// phase of the 1.6 GHz clock and checks every bit of 200 words at its exact
// position: bit 31 of the word driven at serial edge n is in the high phase
// after edge n+8. Also checks the word clock period (16 serial cycles,
// 32 bits per word).
module tb_serializer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] word;
  logic clk_word, ser;
  int checks = 0, failures = 0;
  int n = 0;                 // serial rising edges since reset
  logic bits [$];            // bits[2n] = high phase after edge n, bits[2n+1] = low phase
  int   word_edge [$];       // serial edge at which each word was driven
  logic [31:0] words [$];
  int   last_rise = -1;

  serializer dut (.clk_ser(clk), .rst_n(rst_n), .word_i(word), .clk_word_o(clk_word), .ser_o(ser));

  // 1.6 GHz: 625 ps period (312 ps + 313 ps with 1 ps resolution)
  always begin
    #0.312 clk = 1'b1;
    #0.313 clk = 1'b0;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk_word) begin
    word <= 32'($urandom);
    words.push_back(word);   // the value before this edge: words[i+1] is driven at word_edge[i]
  end

  initial begin
    word = 32'h0;
    words.delete();
    #2 rst_n = 1'b1;
    forever begin
      @(posedge clk);
      #0.15 bits.push_back(ser);
      @(negedge clk);
      #0.15 bits.push_back(ser);
      n++;
    end
  end

  // record the serial edge at which the word clock rises
  always @(posedge clk_word) begin
    checks++;
    if (last_rise >= 0 && n - last_rise != 16) begin
      failures++;
      $display("word clock period %0d serial cycles", n - last_rise);
    end
    last_rise = n;
    word_edge.push_back(n);
  end

  initial begin
    logic [31:0] w;
    int base;
    wait (word_edge.size() == 203);
    // words[i+1] is the value driven at word_edge[i]
    for (int i = 0; i < 200; i++) begin
      w = words[i+1];
      base = 2 * (word_edge[i] + 8);
      for (int k = 0; k < 32; k++) begin
        checks++;
        if (bits[base + k] !== w[31-k]) begin
          failures++;
          if (failures < 10) $display("word %0d bit %0d: got %b exp %b", i, 31-k, bits[base+k], w[31-k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
