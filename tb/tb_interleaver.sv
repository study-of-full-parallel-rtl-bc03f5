// tb_interleaver: checks the symbol order A30,B30,...,A0,B0 of the
// registered 310-bit output for 300 random codeword pairs, built here as a
// serial symbol list, and that the output holds while en is low.
module tb_interleaver;
  import rs_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  code_t a, b;
  logic [309:0] q, exp_q;
  int checks = 0, failures = 0;

  interleaver dut (.clk(clk), .rst_n(rst_n), .en(en), .code_a_i(a), .code_b_i(b), .data_o(q));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sym_t syms [$];
    a = '0; b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    checks++;
    if (q !== '0) begin failures++; $display("reset value wrong"); end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      a = {rand135(), 20'($urandom)};
      b = {rand135(), 20'($urandom)};
      en = 1'b1;
      syms.delete();
      for (int dg = 30; dg >= 0; dg--) begin
        syms.push_back(a[5*dg +: 5]);
        syms.push_back(b[5*dg +: 5]);
      end
      for (int k = 0; k < 62; k++) exp_q[309 - 5*k -: 5] = syms[k];
      @(negedge clk);
      en = 1'b0;
      a = ~a;
      checks++;
      if (q !== exp_q) begin failures++; $display("pair %0d: got %h exp %h", i, q, exp_q); end
      @(negedge clk);
      checks++;
      if (q !== exp_q) begin failures++; $display("pair %0d: output did not hold", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
