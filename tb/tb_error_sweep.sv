// tb_error_sweep: bit-error-rate sweep over the transmitter's output, as far
// as the transmitter side can be simulated.
//
// The published measurement varies the optical power at the receiver and
// counts bit errors ("transmission errors") and frames still wrong after RS
// correction. Here the full-size transmitter sends 60 frames of random
// sensor data; the captured serial stream is then passed through a binary
// symmetric channel at five bit error rates, and a receiver model
// (rs_ref_pkg::decode, up to two symbol errors per code) corrects each
// frame. For every rate it reports raw bit errors, frames wrong before and
// after correction, codes flagged uncorrectable, and codes decoded to a
// wrong word without being flagged (the weakness of RS error detection that
// motivates adding a CRC).
// Checks: every code with at most two wrong symbols is restored exactly; a
// decoder self-test with one and two injected symbol errors per code; frames
// wrong after correction never exceed frames wrong before; some codes are
// corrected and some flagged uncorrectable over the sweep.
module tb_error_sweep;
  import rs_ref_pkg::*;

  localparam int NFRAMES = 60;
  localparam int NRATES  = 5;
  localparam int RATE_PPM [NRATES] = '{1000, 3000, 10000, 20000, 40000};

  logic clk_ser = 1'b0, rst_n = 1'b1;
  logic [269:0] sensor;
  logic data_req, clk_word, ser;
  int checks = 0, failures = 0;
  int n = 0;
  logic bits [$];
  logic [269:0] sent [$];
  int cap_edge [$];
  logic capture_pending = 1'b0, changed = 1'b1;

  rs_transmitter dut (.clk_ser(clk_ser), .rst_n(rst_n), .sensor_data_i(sensor),
                      .data_req_o(data_req), .clk_word_o(clk_word), .ser_o(ser));

  always begin
    #0.312 clk_ser = 1'b1;
    #0.313 clk_ser = 1'b0;
  end

  initial begin
    #30000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
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

  // only frames requested after the reset is released count
  always @(negedge clk_word) begin
    if (rst_n && $realtime > 1.0 && data_req) begin
      sent.push_back(sensor);
      capture_pending = 1'b1;
      changed = 1'b0;
    end else if (!changed) begin
      sensor = rand270();
      changed = 1'b1;
    end
  end

  always @(posedge clk_word) begin
    if (capture_pending) begin
      cap_edge.push_back(n);
      capture_pending = 1'b0;
    end
  end

  function automatic void deinterleave(logic [309:0] il, output code_t a, output code_t b);
    for (int d = 0; d < 31; d++) begin
      a[5*d +: 5] = il[10*d + 5 +: 5];
      b[5*d +: 5] = il[10*d +: 5];
    end
  endfunction

  function automatic int sym_diff(code_t x, code_t y);
    int k = 0;
    for (int d = 0; d < 31; d++) if (x[5*d +: 5] != y[5*d +: 5]) k++;
    return k;
  endfunction

  initial begin
    logic [57:0] hist_tx;
    logic [309:0] il [NFRAMES];
    code_t a, b, ra, rb, ca, cb, t;
    int base, ret, bit_err, fe_before, fe_after, flagged, undetected, fixed;
    int total_fixed, total_flagged;
    logic wrong_before, wrong_after;
    logic [319:0] fr;
    total_fixed = 0;
    total_flagged = 0;
    sensor = rand270();
    hist_tx = '1;
    wait (cap_edge.size() == NFRAMES);
    wait (n > cap_edge[NFRAMES-1] + 5*160 + 40);
    // transmitted frames, checked error-free first
    for (int i = 0; i < NFRAMES; i++) begin
      base = 2 * (cap_edge[i] + 30*16 + 8);
      for (int k = 0; k < 320; k++) fr[319-k] = bits[base + k];
      il[i] = fr[309:0];
      deinterleave(il[i], a, b);
      checks++;
      if ({a[154:20], b[154:20]} !== scramble(sent[i], hist_tx) || syndromes(a) != 0 || syndromes(b) != 0) begin
        failures++; $display("frame %0d not sent correctly", i);
      end
    end
    // decoder self-test: one and two symbol errors per code
    for (int i = 0; i < NFRAMES; i++) begin
      deinterleave(il[i], a, b);
      for (int ne = 1; ne <= 2; ne++) begin
        automatic int p1 = int'($urandom % 31);
        automatic int p2 = (p1 + 1 + int'($urandom % 30)) % 31;
        t = a;
        t[5*p1 +: 5] ^= 5'(1 + $urandom % 31);
        if (ne == 2) t[5*p2 +: 5] ^= 5'(1 + $urandom % 31);
        ret = decode(t, ca);
        checks++;
        if (ret != 1 || ca !== a) begin failures++; $display("decoder self-test failed, %0d errors", ne); end
      end
    end
    $display(" BER(ppm)  bit errors  frames wrong before  after  codes flagged  codes undetected");
    for (int r = 0; r < NRATES; r++) begin
      bit_err = 0; fe_before = 0; fe_after = 0; flagged = 0; undetected = 0; fixed = 0;
      for (int i = 0; i < NFRAMES; i++) begin
        automatic logic [309:0] rx = il[i];
        for (int k = 0; k < 310; k++)
          if (($urandom % 1000000) < RATE_PPM[r]) begin rx[k] = ~rx[k]; bit_err++; end
        deinterleave(il[i], a, b);
        deinterleave(rx, ra, rb);
        wrong_before = (rx != il[i]);
        wrong_after  = 1'b0;
        for (int c = 0; c < 2; c++) begin
          automatic code_t tx_c = (c != 0) ? b : a;
          automatic code_t rx_c = (c != 0) ? rb : ra;
          automatic code_t dec_c;
          ret = decode(rx_c, dec_c);
          if (sym_diff(rx_c, tx_c) <= 2) begin
            checks++;
            if (dec_c !== tx_c) begin failures++; $display("correctable code not restored"); end
            if (ret == 1) fixed++;
          end
          if (ret == 2) flagged++;
          else if (dec_c !== tx_c) undetected++;
          if (dec_c[154:20] !== tx_c[154:20]) wrong_after = 1'b1;
        end
        if (wrong_before) fe_before++;
        if (wrong_after)  fe_after++;
      end
      $display(" %8d  %10d  %19d  %5d  %13d  %16d", RATE_PPM[r], bit_err, fe_before, fe_after, flagged, undetected);
      checks++;
      if (fe_after > fe_before) begin failures++; $display("correction made frames worse"); end
      total_fixed += fixed;
      total_flagged += flagged;
    end
    checks++;
    if (total_fixed == 0) begin failures++; $display("no code was corrected"); end
    checks++;
    if (total_flagged == 0) begin failures++; $display("no code was flagged uncorrectable"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
