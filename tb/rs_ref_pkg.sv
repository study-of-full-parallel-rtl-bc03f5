// rs_ref_pkg: reference models for the transmitter testbenches, written
// independently of the RTL's arithmetic.
//
// GF(32) multiplication goes through exp/log tables built by stepping a^i
// (x^5 = x^2 + 1); the RTL multiplies by shift-and-add. RS check symbols
// come from a symbol-serial LFSR division (the classic encoder structure
// with registers C0..C3 and multipliers g0..g3); the RTL uses a flat XOR
// network. Syndromes evaluate a received codeword at a^1..a^4. The scrambler
// model runs bit by bit over the sensor stream. decode() is a model of the
// receiver's decoder (the transmitter itself has none).
package rs_ref_pkg;

  typedef logic [4:0]   sym_t;
  typedef logic [134:0] info_t;
  typedef logic [154:0] code_t;

  function automatic sym_t alpha_pow(int e);
    sym_t r = 5'd1;
    e = e % 31;
    for (int i = 0; i < e; i++) r = {r[3:0], 1'b0} ^ (r[4] ? 5'b00101 : 5'b00000);
    return r;
  endfunction

  function automatic int gf_log(sym_t a);
    for (int i = 0; i < 31; i++) if (alpha_pow(i) == a) return i;
    return -1;
  endfunction

  function automatic sym_t mul(sym_t a, sym_t b);
    if (a == 0 || b == 0) return 5'd0;
    return alpha_pow(gf_log(a) + gf_log(b));
  endfunction

  // g(x) = (x+a)(x+a^2)(x+a^3)(x+a^4); g[4] = 1
  function automatic void generator(output sym_t g [5]);
    sym_t t [5];
    for (int k = 0; k < 5; k++) g[k] = 0;
    g[0] = 1;
    for (int r = 1; r <= 4; r++) begin
      for (int k = 0; k < 5; k++) t[k] = 0;
      for (int k = 0; k < 4; k++) begin
        t[k+1] ^= g[k];
        t[k]   ^= mul(g[k], alpha_pow(r));
      end
      g = t;
    end
  endfunction

  // Serial LFSR encoder, information symbol of degree 30 first.
  function automatic code_t encode(info_t info);
    sym_t g [5];
    sym_t c [4];
    sym_t fb;
    generator(g);
    for (int k = 0; k < 4; k++) c[k] = 0;
    for (int i = 26; i >= 0; i--) begin
      fb = info[5*i +: 5] ^ c[3];
      c[3] = c[2] ^ mul(fb, g[3]);
      c[2] = c[1] ^ mul(fb, g[2]);
      c[1] = c[0] ^ mul(fb, g[1]);
      c[0] = mul(fb, g[0]);
    end
    return {info, c[3], c[2], c[1], c[0]};
  endfunction

  // Syndrome S_j = r(a^j), j = 1..4, packed {S4,S3,S2,S1}; zero for a codeword.
  function automatic logic [19:0] syndromes(code_t r);
    logic [19:0] s;
    sym_t acc;
    for (int j = 1; j <= 4; j++) begin
      acc = 0;
      for (int d = 30; d >= 0; d--) acc = mul(acc, alpha_pow(j)) ^ r[5*d +: 5];
      s[5*(j-1) +: 5] = acc;
    end
    return s;
  endfunction

  function automatic sym_t inv(sym_t a);
    return alpha_pow(31 - gf_log(a));
  endfunction

  // Receiver model: RS(31,27) decoder for up to two symbol errors (Peterson's
  // direct solution for t = 2, root search over all 31 positions, error
  // values from S1 and S2). Returns 0 = no error, 1 = corrected,
  // 2 = detected as uncorrectable (c is then r unchanged).
  function automatic int decode(code_t r, output code_t c);
    logic [19:0] s;
    sym_t s1, s2, s3, s4, det, sg1, sg2, v, x1, x2, e1, e2;
    int pos [$];
    c = r;
    s = syndromes(r);
    if (s == 0) return 0;
    {s4, s3, s2, s1} = s;
    det = mul(s2, s2) ^ mul(s1, s3);
    if (det != 0) begin
      sg1 = mul(mul(s2, s3) ^ mul(s1, s4), inv(det));
      sg2 = mul(mul(s2, s4) ^ mul(s3, s3), inv(det));
    end else begin
      if (s1 == 0) return 2;
      sg1 = mul(s2, inv(s1));
      sg2 = 0;
    end
    // sigma(x) = 1 + sg1 x + sg2 x^2 has roots x = a^-i at error degrees i
    for (int i = 0; i < 31; i++) begin
      v = alpha_pow(31 - i);
      if ((5'd1 ^ mul(sg1, v) ^ mul(sg2, mul(v, v))) == 0) pos.push_back(i);
    end
    if (pos.size() != ((sg2 != 0) ? 2 : 1)) return 2;
    x1 = alpha_pow(pos[0]);
    if (pos.size() == 1) begin
      e1 = mul(s1, inv(x1));
      c[5*pos[0] +: 5] ^= e1;
    end else begin
      x2 = alpha_pow(pos[1]);
      e1 = mul(s2 ^ mul(s1, x2), inv(mul(x1, x1 ^ x2)));
      e2 = mul(s1 ^ mul(e1, x1), inv(x2));
      c[5*pos[0] +: 5] ^= e1;
      c[5*pos[1] +: 5] ^= e2;
    end
    if (syndromes(c) != 0) begin c = r; return 2; end
    return 1;
  endfunction

  // Bit-serial self-synchronous scrambler 1 + x^39 + x^58 over one frame.
  // hist[0] is the most recent scrambled bit; updated in place.
  function automatic logic [269:0] scramble(logic [269:0] d, ref logic [57:0] hist);
    logic [269:0] s;
    logic b;
    for (int t = 0; t < 270; t++) begin
      b = d[269-t] ^ hist[38] ^ hist[57];
      s[269-t] = b;
      hist = {hist[56:0], b};
    end
    return s;
  endfunction

  // Descrambler: the receiver's inverse, also bit-serial.
  function automatic logic [269:0] descramble(logic [269:0] s, ref logic [57:0] hist);
    logic [269:0] d;
    for (int t = 0; t < 270; t++) begin
      d[269-t] = s[269-t] ^ hist[38] ^ hist[57];
      hist = {hist[56:0], s[269-t]};
    end
    return d;
  endfunction

  function automatic logic [269:0] rand270();
    logic [269:0] v;
    for (int i = 0; i < 9; i++) v[30*i +: 30] = 30'($urandom);
    return v;
  endfunction

  function automatic info_t rand135();
    logic [269:0] v = rand270();
    return v[134:0];
  endfunction

endpackage
