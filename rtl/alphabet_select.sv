// alphabet_select: the "select" unit of an ASM.
//
// Passes alphabet number i_sel of the pre-computer bus to the shift unit.
// With a single alphabet (the multiplier-less neuron) it is a wire and the
// select input is unused. Purely combinational.
//
// Function from the paper; a plain multiplexer is this design's choice.
module alphabet_select #(
  parameter int unsigned NUM_ALPHA = man_pkg::DEF_ASM_ALPHA,
  parameter int unsigned AL_W      = man_pkg::DEF_IN_W + 4,
  localparam int unsigned SEL_W    = (NUM_ALPHA > 1) ? $clog2(NUM_ALPHA) : 1
) (
  input  logic [AL_W-1:0]  i_alpha [NUM_ALPHA],
  input  logic [SEL_W-1:0] i_sel,
  output logic [AL_W-1:0]  o_alpha
);

  always_comb begin
    o_alpha = i_alpha[0];
    for (int unsigned k = 1; k < NUM_ALPHA; k++)
      if (int'(i_sel) == k) o_alpha = i_alpha[k];
  end

endmodule
