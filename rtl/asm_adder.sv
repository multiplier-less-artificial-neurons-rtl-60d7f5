// asm_adder: the final "add" unit of an ASM.
//
// Adds the NQ quartet partial products, partial product q shifted left by
// 4q places (the "shifted by 4" path of the 8-bit ASM), giving the product
// of I and the weight magnitude. The sign of the two's complement weight is
// then applied, so o_prod = (-1)^sign * |W| * I as a signed PROD_W =
// IN_W + WT_W bit word. Purely combinational.
//
// Multiplying the magnitude only and restoring the sign follows the paper;
// the two's complement negation at the output is this design's choice.
module asm_adder #(
  parameter int unsigned IN_W = man_pkg::DEF_IN_W,
  parameter int unsigned WT_W = man_pkg::DEF_WT_W,
  localparam int unsigned NQ     = man_pkg::num_quartets(WT_W),
  localparam int unsigned PP_W   = IN_W + 7,
  localparam int unsigned PROD_W = IN_W + WT_W
) (
  input  logic [PP_W-1:0]          i_pp [NQ],
  input  logic                     i_neg,
  output logic signed [PROD_W-1:0] o_prod
);

  logic [PROD_W-1:0] mag;

  always_comb begin
    mag = '0;
    for (int unsigned q = 0; q < NQ; q++)
      mag = mag + (PROD_W'(i_pp[q]) << (4 * q));
    o_prod = i_neg ? -signed'(mag) : signed'(mag);
  end

endmodule
