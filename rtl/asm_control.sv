// asm_control: control logic of one weight quartet of an ASM.
//
// A nonzero quartet value v is written as alphabet * 2^shift with an odd
// alphabet: shift is the number of trailing zeros of v and the alphabet is
// v >> shift, whose index in {1,3,5,...} is (alphabet-1)/2. The quartet
// 1010 (10) thus selects alphabet 5 (index 2) shifted by 1, and 0100 (4)
// selects alphabet 1 shifted by 2. A zero quartet raises o_zero.
//
// Quartets whose odd part lies outside the built alphabet set cannot be
// formed. Weight constraining keeps them out of the weights; should one
// arrive anyway, o_unsup is raised and the largest built alphabet is
// selected with the same shift (a choice of this design; the paper's
// weights never contain such quartets).
//
// Interface: i_q (QB bits) -> o_sel (index, SEL_W bits), o_shift (0..3),
// o_zero, o_unsup. Purely combinational.
module asm_control #(
  parameter int unsigned QB        = man_pkg::QB,
  parameter int unsigned NUM_ALPHA = man_pkg::DEF_ASM_ALPHA,
  localparam int unsigned SEL_W    = (NUM_ALPHA > 1) ? $clog2(NUM_ALPHA) : 1
) (
  input  logic [QB-1:0]    i_q,
  output logic [SEL_W-1:0] o_sel,
  output logic [1:0]       o_shift,
  output logic             o_zero,
  output logic             o_unsup
);

  logic [3:0] q4;
  logic [2:0] idx;

  always_comb begin
    q4      = 4'(i_q);
    if      (q4[0]) o_shift = 2'd0;
    else if (q4[1]) o_shift = 2'd1;
    else if (q4[2]) o_shift = 2'd2;
    else            o_shift = 2'd3;
    o_zero  = (q4 == 4'd0);
    // (odd part - 1) / 2: drop the trailing zeros and the odd part's own 1
    idx     = 3'(q4 >> (3'(o_shift) + 3'd1));
    o_unsup = !o_zero && (int'(idx) >= NUM_ALPHA);
    if (o_zero)       o_sel = '0;
    else if (o_unsup) o_sel = SEL_W'(NUM_ALPHA - 1);
    else              o_sel = SEL_W'(idx);
  end

endmodule
