// tmr_reg: register protected by triple modular redundancy.
//
// The value is held in three copies. The output is the bitwise 2-of-3
// majority of the copies, so an upset in any one copy never reaches q. In
// every cycle that en is low, the voted value is written back into all
// three copies (scrubbing), so a single upset is repaired one clock later
// and cannot pile up with a later one in another copy. With en high all
// copies load d. err is high while the copies disagree.
//
// Interface: clk, asynchronous active-low rst_n (all copies to RESET_VAL),
// en, d -> q one clock later. TMR = 0 builds a plain register (err = 0).
//
// The paper states that the transmitter logic is protected by TMR; the
// voter form, the scrubbing write-back and the reset are this design's
// choices.
module tmr_reg #(
  parameter int unsigned      WIDTH     = 1,
  parameter bit               TMR       = 1'b1,
  parameter logic [WIDTH-1:0] RESET_VAL = '0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q,
  output logic             err
);

  if (TMR) begin : g_tmr
    logic [WIDTH-1:0] copy [3];
    logic [WIDTH-1:0] voted;

    assign voted = (copy[0] & copy[1]) | (copy[1] & copy[2]) | (copy[0] & copy[2]);

    for (genvar c = 0; c < 3; c++) begin : g_copy
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)  copy[c] <= RESET_VAL;
        else if (en) copy[c] <= d;
        else         copy[c] <= voted;
      end
    end

    assign q   = voted;
    assign err = (copy[0] != copy[1]) || (copy[1] != copy[2]);
  end else begin : g_plain
    logic [WIDTH-1:0] r;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  r <= RESET_VAL;
      else if (en) r <= d;
    end
    assign q   = r;
    assign err = 1'b0;
  end

endmodule
