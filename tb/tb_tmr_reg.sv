// tb_tmr_reg: checks the triple-redundant register: reset value, load,
// hold, that an upset in any single copy never reaches q, that err flags
// it, and that the scrubbing write-back repairs it one clock later.
module tb_tmr_reg;
  localparam int W = 8;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [W-1:0] d, q, model;
  logic err;
  int checks = 0, failures = 0;

  tmr_reg #(.WIDTH(W), .RESET_VAL(8'hA5)) dut (.clk(clk), .rst_n(rst_n), .en(en), .d(d), .q(q), .err(err));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_q(logic [W-1:0] v, logic e, string what);
    checks++;
    if (q !== v || err !== e) begin
      failures++;
      $display("%s: q=%h err=%b expected q=%h err=%b", what, q, err, v, e);
    end
  endtask

  initial begin
    d = '0;
    #12;
    expect_q(8'hA5, 1'b0, "reset");
    rst_n = 1'b1;
    model = 8'hA5;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      en = 1'($urandom);
      d  = 8'($urandom);
      if (en) model = d;
      @(negedge clk);
      en = 1'b0;
      expect_q(model, 1'b0, "load/hold");
      // single-event upset in one copy, random bits
      begin
        automatic int c = int'($urandom % 3);
        automatic logic [W-1:0] flip = 8'($urandom) | 8'h01;
        case (c)
          0: dut.g_tmr.copy[0] = dut.g_tmr.copy[0] ^ flip;
          1: dut.g_tmr.copy[1] = dut.g_tmr.copy[1] ^ flip;
          default: dut.g_tmr.copy[2] = dut.g_tmr.copy[2] ^ flip;
        endcase
      end
      #1;
      expect_q(model, 1'b1, "upset masked");
      @(negedge clk);
      expect_q(model, 1'b0, "upset scrubbed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
