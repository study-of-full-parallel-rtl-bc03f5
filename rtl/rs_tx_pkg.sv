// rs_tx_pkg: sizes, GF(32) arithmetic and the parallel RS(31,27) check-bit
// table shared by the transmitter blocks.
//
// Code: RS(31,27) over GF(32), 5-bit symbols, 27 information and 4 check
// symbols per code, two codes per 320-bit frame (10-bit header + 2 x 155).
// These numbers follow the paper. The field polynomial x^5+x^2+1 and the
// generator g(x) = (x-a)(x-a^2)(x-a^3)(x-a^4) are this design's choice; the
// paper does not state them.
//
// rs_parity_masks() reproduces the paper's method for deriving the parallel
// encoder: it simulates the serial LFSR encoder symbolically for the 27 data
// cycles. Every register bit is held as a 135-bit mask over GF(2) saying
// which information bits it is the XOR of; after the last data symbol the
// four LFSR registers hold the check symbols, so the masks are the XOR
// equations of the 20 check bits. It is a constant function, evaluated at
// elaboration.
package rs_tx_pkg;

  localparam int unsigned SYM_W     = 5;
  localparam int unsigned RS_N      = 31;
  localparam int unsigned RS_K      = 27;
  localparam int unsigned NROOTS    = RS_N - RS_K;          // 4
  localparam int unsigned INFO_W    = RS_K * SYM_W;         // 135
  localparam int unsigned PAR_W     = NROOTS * SYM_W;       // 20
  localparam int unsigned CODE_W    = RS_N * SYM_W;         // 155
  localparam int unsigned NUM_CODES = 2;
  localparam int unsigned DATA_W    = NUM_CODES * INFO_W;   // 270 sensor bits per frame
  localparam int unsigned IL_W      = NUM_CODES * CODE_W;   // 310
  localparam int unsigned HEADER_W  = 10;
  localparam int unsigned FRAME_W   = HEADER_W + IL_W;      // 320
  localparam int unsigned WORD_W    = 32;
  localparam int unsigned WORDS_PER_FRAME = FRAME_W / WORD_W; // 10

  localparam logic [SYM_W:0]    PRIM_POLY = 6'b100101;      // x^5 + x^2 + 1
  localparam int unsigned       FCR       = 1;              // first root a^1
  localparam logic [HEADER_W-1:0] HEADER  = 10'b0011111010; // K28.5 pattern

  typedef logic [SYM_W-1:0]  sym_t;
  typedef logic [INFO_W-1:0] info_t;
  typedef logic [CODE_W-1:0] code_t;
  typedef info_t             mask_arr_t [PAR_W];
  typedef sym_t              gen_t [NROOTS+1];

  // GF(32) multiply, polynomial basis.
  function automatic sym_t gf_mul(sym_t a, sym_t b);
    logic [SYM_W:0] acc;
    logic [SYM_W:0] aa;
    acc = '0;
    aa  = {1'b0, a};
    for (int i = 0; i < SYM_W; i++) begin
      if (b[i]) acc ^= aa;
      aa = aa << 1;
      if (aa[SYM_W]) aa ^= PRIM_POLY;
    end
    return acc[SYM_W-1:0];
  endfunction

  // a^e
  function automatic sym_t gf_pow_alpha(int unsigned e);
    sym_t r;
    r = sym_t'(1);
    for (int unsigned i = 0; i < e; i++) r = gf_mul(r, sym_t'(2));
    return r;
  endfunction

  // Generator polynomial coefficients g[0..4], g[4] = 1 (monic).
  function automatic gen_t rs_generator();
    gen_t g;
    gen_t ng;
    sym_t root;
    for (int k = 0; k <= NROOTS; k++) g[k] = '0;
    g[0] = sym_t'(1);
    for (int r = 0; r < NROOTS; r++) begin
      root = gf_pow_alpha(FCR + r);
      for (int k = 0; k <= NROOTS; k++) ng[k] = '0;
      for (int k = 0; k < NROOTS; k++) begin
        ng[k+1] ^= g[k];                 // x * g
        ng[k]   ^= gf_mul(g[k], root);   // root * g  (minus = plus)
      end
      g = ng;
    end
    return g;
  endfunction

  // Symbolic simulation of the LFSR encoder (one symbol per cycle, highest
  // degree first). reg_m[k*5+b] is the mask of bit b of LFSR register Ck.
  function automatic mask_arr_t rs_parity_masks();
    gen_t      g;
    mask_arr_t reg_m;
    mask_arr_t nxt;
    info_t     fb [SYM_W];
    info_t     prod [SYM_W];
    sym_t      col;
    g = rs_generator();
    for (int j = 0; j < PAR_W; j++) reg_m[j] = '0;
    for (int d = RS_K - 1; d >= 0; d--) begin
      // feedback symbol = data symbol d  XOR  C3
      for (int b = 0; b < SYM_W; b++) begin
        fb[b] = reg_m[(NROOTS-1)*SYM_W + b] ^ (info_t'(1) << (d*SYM_W + b));
      end
      for (int k = 0; k < NROOTS; k++) begin
        // prod = g[k] * fb : column j of the multiplier matrix is g[k]*a^j
        for (int b = 0; b < SYM_W; b++) prod[b] = '0;
        for (int j = 0; j < SYM_W; j++) begin
          col = gf_mul(g[k], sym_t'(1 << j));
          for (int b = 0; b < SYM_W; b++)
            if (col[b]) prod[b] ^= fb[j];
        end
        for (int b = 0; b < SYM_W; b++)
          nxt[k*SYM_W + b] = (k == 0) ? prod[b] : (reg_m[(k-1)*SYM_W + b] ^ prod[b]);
      end
      reg_m = nxt;
    end
    return reg_m;
  endfunction

endpackage
