// asm_multiplier: one alphabet set multiplier (ASM) without its bank.
//
// Multiplies a signed synapse weight W by the input I using alphabets
// (odd multiples of I) that a shared pre-computer bank supplies. The weight
// magnitude |W| is cut into quartets (two for 8 bits, three for 12); each
// quartet has its own control logic, select unit and shift unit, and the
// adder sums the quartet partial products with weights 2^(4q) and restores
// the sign. For W = 01001010 the LSB quartet 1010 selects 5I shifted by 1
// and the MSB quartet 0100 selects 1I shifted by 2, and the adder forms
// 4I * 2^4 + 10I. With NUM_ALPHA = 1 the select unit is a wire and the
// multiplier is the shift-and-add multiplier-less neuron datapath.
//
// The product is exact for weights whose quartets are all supported by the
// alphabet set (see weight_constrainer). The most negative weight, whose
// magnitude has no WT_W-1 bit form, is taken as -(2^(WT_W-1)-1).
//
// Interface: i_alpha[NUM_ALPHA] (AL_W = IN_W+4 bits), i_w (signed WT_W) ->
// o_prod (signed IN_W+WT_W), o_unsup (some quartet was not supported).
// Purely combinational.
//
// Structure from the paper; the saturation of the most negative weight and
// the handling of unsupported quartets are this design's choices.
module asm_multiplier #(
  parameter int unsigned IN_W      = man_pkg::DEF_IN_W,
  parameter int unsigned WT_W      = man_pkg::DEF_WT_W,
  parameter int unsigned NUM_ALPHA = man_pkg::DEF_ASM_ALPHA,
  localparam int unsigned AL_W     = IN_W + 4,
  localparam int unsigned PP_W     = AL_W + 3,
  localparam int unsigned NQ       = man_pkg::num_quartets(WT_W),
  localparam int unsigned SEL_W    = (NUM_ALPHA > 1) ? $clog2(NUM_ALPHA) : 1,
  localparam int unsigned PROD_W   = IN_W + WT_W
) (
  input  logic [AL_W-1:0]          i_alpha [NUM_ALPHA],
  input  logic signed [WT_W-1:0]   i_w,
  output logic signed [PROD_W-1:0] o_prod,
  output logic                     o_unsup
);

  logic [WT_W-2:0]     mag;
  logic [NQ*4-1:0]     mag_q;
  logic [PP_W-1:0]     pp    [NQ];
  logic [NQ-1:0]       unsup;

  always_comb begin
    if (i_w == {1'b1, {(WT_W-1){1'b0}}}) mag = '1;
    else if (i_w[WT_W-1])                mag = (WT_W-1)'(-i_w);
    else                                 mag = i_w[WT_W-2:0];
    mag_q = (NQ*4)'(mag);
  end

  for (genvar q = 0; q < NQ; q++) begin : g_quartet
    logic [SEL_W-1:0] sel;
    logic [1:0]       shift;
    logic             zero;
    logic [AL_W-1:0]  alpha;

    asm_control #(.QB(4), .NUM_ALPHA(NUM_ALPHA)) u_ctrl (
      .i_q    (mag_q[4*q +: 4]),
      .o_sel  (sel),
      .o_shift(shift),
      .o_zero (zero),
      .o_unsup(unsup[q])
    );

    alphabet_select #(.NUM_ALPHA(NUM_ALPHA), .AL_W(AL_W)) u_sel (
      .i_alpha(i_alpha),
      .i_sel  (sel),
      .o_alpha(alpha)
    );

    quartet_shifter #(.AL_W(AL_W)) u_shift (
      .i_alpha(alpha),
      .i_shift(shift),
      .i_zero (zero),
      .o_pp   (pp[q])
    );
  end

  asm_adder #(.IN_W(IN_W), .WT_W(WT_W)) u_add (
    .i_pp  (pp),
    .i_neg (i_w[WT_W-1]),
    .o_prod(o_prod)
  );

  assign o_unsup = |unsup;

endmodule
