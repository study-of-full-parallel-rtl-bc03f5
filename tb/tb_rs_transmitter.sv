// tb_rs_transmitter: end-to-end test of the transmitter at its full size.
//
// Feeds 40 frames of sensor data (random, except ten all-zero frames) on
// data_req_o, samples the 3.2 Gb/s DDR output in the middle of every half
// period of the 1.6 GHz clock and acts as the receiver: it takes each frame
// at the position fixed by the pipeline latency (header's first bit in the
// high phase after serial edge E+30*16+8, E = word clock edge that captured
// the data), checks the header, de-interleaves the two codewords, checks
// their syndromes, compares their information symbols with a bit-serial
// scrambler model and descrambles them back to the sensor data.
// It also makes each mechanism of the design happen and counts it:
//   frames       frame strobes and frames received in order at 320 bits/100 ns
//   codewords    codewords with all four syndromes zero
//   dc_balance   all-zero sensor frames sent with a ones density of 40-60 %
//   continuity   frames whose descrambling depends on the previous frame
//   seu          upsets injected into one TMR copy of four registers and
//                flagged by the voter, while the output stays correct
//   burst        20-bit symbol-aligned bursts applied to received frames,
//                each touching at most two symbols of each code
module tb_rs_transmitter;
  import rs_ref_pkg::*;

  localparam int NFRAMES = 40;
  localparam logic [9:0] HDR = 10'b0011111010;

  logic clk_ser = 1'b0, rst_n = 1'b1;
  logic [269:0] sensor;
  logic data_req, clk_word, ser;
  int checks = 0, failures = 0;
  int n = 0;
  logic bits [$];
  logic [269:0] sent [$];
  int cap_edge [$];
  logic capture_pending = 1'b0, changed = 1'b1;
  int cnt_frames = 0, cnt_codewords = 0, cnt_dc = 0, cnt_cont = 0, cnt_seu = 0, cnt_burst = 0;

  rs_transmitter dut (.clk_ser(clk_ser), .rst_n(rst_n), .sensor_data_i(sensor),
                      .data_req_o(data_req), .clk_word_o(clk_word), .ser_o(ser));

  always begin
    #0.312 clk_ser = 1'b1;
    #0.313 clk_ser = 1'b0;
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample the DDR stream: bits[2n] high phase after serial edge n, bits[2n+1] low phase
  initial begin
    // a falling reset edge: the word clock is held low during reset, so the
    // word-clock registers reset asynchronously
    #0.1 rst_n = 1'b0;
    #1.9 rst_n = 1'b1;
    forever begin
      @(posedge clk_ser);
      #0.15 bits.push_back(ser);
      @(negedge clk_ser);
      #0.15 bits.push_back(ser);
      n++;
    end
  end

  // sensor side: present a frame, change it after the capturing edge
  // only frames requested after the reset is released count
  always @(negedge clk_word) begin
    if (rst_n && $realtime > 1.0 && data_req) begin
      sent.push_back(sensor);
      capture_pending = 1'b1;
      changed = 1'b0;
    end else if (!changed) begin
      sensor = (sent.size() >= 10 && sent.size() < 20) ? '0 : rand270();
      changed = 1'b1;
    end
  end

  always @(posedge clk_word) begin
    if (capture_pending) begin
      cap_edge.push_back(n);
      capture_pending = 1'b0;
      cnt_frames++;
    end
  end

  task automatic seu_check(logic err, string where);
    checks++;
    if (err !== 1'b1) begin failures++; $display("upset in %s not flagged", where); end
    else cnt_seu++;
  endtask

  // single-event upsets in one copy of four different triple-redundant registers
  initial begin
    wait (sent.size() == 12);
    @(negedge clk_word);
    dut.u_encoder1.u_code_q.g_tmr.copy[1] = ~dut.u_encoder1.u_code_q.g_tmr.copy[1];
    #0.01 seu_check(dut.u_encoder1.u_code_q.err, "encoder 1 codeword");
    wait (sent.size() == 16);
    @(negedge clk_word);
    dut.u_scrambler.u_hist.g_tmr.copy[0] = ~dut.u_scrambler.u_hist.g_tmr.copy[0];
    #0.01 seu_check(dut.u_scrambler.u_hist.err, "scrambler history");
    wait (sent.size() == 20);
    @(negedge clk_word);
    dut.u_frame_builder.u_cnt.g_tmr.copy[2] = dut.u_frame_builder.u_cnt.g_tmr.copy[2] ^ 4'b0101;
    #0.01 seu_check(dut.u_frame_builder.u_cnt.err, "frame word counter");
    wait (sent.size() == 24);
    @(negedge clk_ser);
    dut.u_serializer.u_div.g_tmr.copy[0] = dut.u_serializer.u_div.g_tmr.copy[0] ^ 4'b1000;
    #0.01 seu_check(dut.u_serializer.u_div.err, "serial clock divider");
  end

  function automatic void deinterleave(logic [309:0] il, output code_t a, output code_t b);
    for (int d = 0; d < 31; d++) begin
      a[5*d +: 5] = il[10*d + 5 +: 5];
      b[5*d +: 5] = il[10*d +: 5];
    end
  endfunction

  initial begin
    logic [57:0] hist_tx, hist_rx;
    logic [319:0] fr;
    logic [309:0] il;
    code_t a, b, ea, eb;
    logic [269:0] exp_scr, rx_scr;
    int base, ones, sa, sb;
    sensor = rand270();
    hist_tx = '1;
    hist_rx = '1;
    wait (cap_edge.size() == NFRAMES);
    // last frame leaves the serializer about 4 frames later
    wait (n > cap_edge[NFRAMES-1] + 5*160 + 40);
    for (int i = 0; i < NFRAMES; i++) begin
      base = 2 * (cap_edge[i] + 30*16 + 8);
      for (int k = 0; k < 320; k++) fr[319-k] = bits[base + k];
      checks++;
      if (i > 0 && cap_edge[i] - cap_edge[i-1] != 160) begin
        failures++; $display("frame period %0d serial cycles", cap_edge[i] - cap_edge[i-1]);
      end
      checks++;
      if (fr[319:310] !== HDR) begin failures++; $display("frame %0d: header %b", i, fr[319:310]); end
      il = fr[309:0];
      deinterleave(il, a, b);
      checks++;
      if (syndromes(a) != 0 || syndromes(b) != 0) begin
        failures++; $display("frame %0d: nonzero syndrome", i);
      end else cnt_codewords += 2;
      // information symbols against the serial scrambler model
      exp_scr = scramble(sent[i], hist_tx);
      rx_scr  = {a[154:20], b[154:20]};
      checks++;
      if (rx_scr !== exp_scr) begin failures++; $display("frame %0d: scrambled data differs", i); end
      checks++;
      if (descramble(rx_scr, hist_rx) !== sent[i]) begin
        failures++; $display("frame %0d: descrambled data differs", i);
      end else if (i > 0) cnt_cont++;
      if (sent[i] == '0) begin
        ones = $countones(rx_scr);
        checks++;
        if (ones < 108 || ones > 162) begin failures++; $display("frame %0d: %0d ones of 270", i, ones); end
        else cnt_dc++;
      end
      // 20-bit burst aligned to a symbol boundary at a random position
      begin
        automatic int p = 5 * int'($urandom % 59);
        automatic logic [309:0] bad = il;
        for (int k = 0; k < 20; k++) bad[309 - p - k] = ~bad[309 - p - k];
        deinterleave(bad, ea, eb);
        sa = 0; sb = 0;
        for (int d = 0; d < 31; d++) begin
          if (ea[5*d +: 5] != a[5*d +: 5]) sa++;
          if (eb[5*d +: 5] != b[5*d +: 5]) sb++;
        end
        checks++;
        if (sa > 2 || sb > 2 || syndromes(ea) == 0 || syndromes(eb) == 0) begin
          failures++; $display("frame %0d: burst hits %0d/%0d symbols", i, sa, sb);
        end else cnt_burst++;
      end
    end
    $display("frames=%0d codewords=%0d dc_balance=%0d continuity=%0d seu=%0d burst=%0d",
             cnt_frames, cnt_codewords, cnt_dc, cnt_cont, cnt_seu, cnt_burst);
    checks++; if (cnt_frames < NFRAMES)        begin failures++; $display("too few frames"); end
    checks++; if (cnt_codewords != 2*NFRAMES)  begin failures++; $display("codeword check never passed for all"); end
    checks++; if (cnt_dc == 0)                 begin failures++; $display("no all-zero frame sent"); end
    checks++; if (cnt_cont == 0)               begin failures++; $display("no descrambling continuity"); end
    checks++; if (cnt_seu != 4)                begin failures++; $display("not all upsets flagged"); end
    checks++; if (cnt_burst == 0)              begin failures++; $display("no burst checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
