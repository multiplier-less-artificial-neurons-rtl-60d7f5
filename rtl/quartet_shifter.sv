// quartet_shifter: the "shift" unit of an ASM.
//
// Shifts the selected alphabet left by i_shift (0..3) places, or outputs
// zero when the quartet is zero. The result is the quartet's partial
// product, (quartet value) * I, before its weight 2^(4q) is applied by the
// adder. Purely combinational; o_pp is AL_W + 3 bits.
//
// Function from the paper; the zero gating is this design's way of
// producing the 0000 quartet, which no alphabet shift gives.
module quartet_shifter #(
  parameter int unsigned AL_W = man_pkg::DEF_IN_W + 4,
  localparam int unsigned PP_W = AL_W + 3
) (
  input  logic [AL_W-1:0] i_alpha,
  input  logic [1:0]      i_shift,
  input  logic            i_zero,
  output logic [PP_W-1:0] o_pp
);

  always_comb o_pp = i_zero ? '0 : (PP_W'(i_alpha) << i_shift);

endmodule
