// tb_rs_encoder: checks the parallel RS(31,27) encoder against a serial
// LFSR reference and against syndromes, for zero, all 135 single-bit and
// 300 random information words; checks the one-cycle latency and that the
// codeword holds while en is low.
module tb_rs_encoder;
  import rs_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  info_t info;
  code_t code;
  int checks = 0, failures = 0;

  rs_encoder dut (.clk(clk), .rst_n(rst_n), .en(en), .info_i(info), .codeword_o(code));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(info_t v);
    code_t exp;
    exp = encode(v);
    @(negedge clk); info = v; en = 1'b1;
    @(negedge clk); en = 1'b0; info = rand135();
    checks++;
    if (code !== exp) begin
      failures++;
      $display("mismatch info=%h got=%h exp=%h", v, code, exp);
    end
    checks++;
    if (syndromes(code) != 0) begin
      failures++;
      $display("nonzero syndrome for info=%h", v);
    end
    @(negedge clk);  // en low: must hold
    checks++;
    if (code !== exp) begin failures++; $display("codeword did not hold"); end
  endtask

  initial begin
    info = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (code !== '0) begin failures++; $display("reset value wrong"); end
    check_one('0);
    for (int i = 0; i < 135; i++) check_one(info_t'(1) << i);
    for (int i = 0; i < 300; i++) check_one(rand135());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
