// rs_encoder: full parallel systematic RS(31,27) encoder over GF(32).
//
// One 135-bit information block (27 symbols of 5 bits) becomes one 155-bit
// codeword in a single clock. The 20 check bits are pure XOR functions of
// the information bits: check bit j is the XOR of the information bits
// selected by MASKS[j]. The masks come from rs_tx_pkg::rs_parity_masks(),
// which symbolically runs the serial LFSR encoder (Figure 1 of the source
// paper: registers C0..C3, multipliers g0..g3) over the 27 data symbols --
// the derivation the paper describes, done at elaboration time here. Each
// check bit is then a wide XOR that synthesis builds as a shallow tree; the
// longest one has 79 inputs with this design's field and generator choice
// (the paper, with polynomials it does not name, reports 70), which a tree
// of 3-input XORs covers in 4 levels.
//
// Codeword layout (coefficient of x^d in bits [5d+4:5d]):
//   [154:20] information symbols, info_i symbol i at degree i+4
//   [19:0]   check symbols, degrees 3..0
// Symbol bit b is the coefficient of a^b.
//
// Timing: info_i is sampled on the clock edge with en high, codeword_o is
// valid after that edge (one cycle of latency) and holds until the next en.
// The 155-bit output register is the encoder's only state (the paper's
// Table 1 lists 155 sequential cells); it is triple-redundant here.
module rs_encoder
  import rs_tx_pkg::*;
#(
  parameter bit TMR = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [INFO_W-1:0] info_i,
  output logic [CODE_W-1:0] codeword_o
);

  localparam mask_arr_t MASKS = rs_parity_masks();

  logic [PAR_W-1:0]  parity;
  logic [CODE_W-1:0] code_d;
  logic              tmr_err_unused;

  always_comb begin
    for (int j = 0; j < PAR_W; j++)
      parity[j] = ^(info_i & MASKS[j]);
  end

  assign code_d = {info_i, parity};

  tmr_reg #(.WIDTH(CODE_W), .TMR(TMR)) u_code_q (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (en),
    .d    (code_d),
    .q    (codeword_o),
    .err  (tmr_err_unused)
  );

endmodule
