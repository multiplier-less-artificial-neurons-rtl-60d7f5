// cshm_unit: computation sharing multiplication for one processing unit.
//
// One pre-computer bank turns the current input I into its alphabets, and
// LANES alphabet set multipliers share them, each multiplying I by the
// synapse weight of a different neuron. In a feedforward layer every input
// feeds all neurons of the next layer, so the bank's work is paid once per
// input rather than once per product. The default of four lanes and four
// weights per input follows the paper's processing unit.
//
// Interface: i_in (unsigned IN_W), i_w[LANES] (signed WT_W) ->
// o_prod[LANES] (signed IN_W+WT_W), o_unsup[LANES]. Purely combinational.
module cshm_unit #(
  parameter int unsigned IN_W      = man_pkg::DEF_IN_W,
  parameter int unsigned WT_W      = man_pkg::DEF_WT_W,
  parameter int unsigned NUM_ALPHA = man_pkg::DEF_ASM_ALPHA,
  parameter int unsigned LANES     = man_pkg::DEF_LANES,
  localparam int unsigned AL_W     = IN_W + 4,
  localparam int unsigned PROD_W   = IN_W + WT_W
) (
  input  logic [IN_W-1:0]          i_in,
  input  logic signed [WT_W-1:0]   i_w     [LANES],
  output logic signed [PROD_W-1:0] o_prod  [LANES],
  output logic [LANES-1:0]         o_unsup
);

  logic [AL_W-1:0] alpha [NUM_ALPHA];

  precomputer_bank #(.IN_W(IN_W), .NUM_ALPHA(NUM_ALPHA)) u_bank (
    .i_in   (i_in),
    .o_alpha(alpha)
  );

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    asm_multiplier #(.IN_W(IN_W), .WT_W(WT_W), .NUM_ALPHA(NUM_ALPHA)) u_asm (
      .i_alpha(alpha),
      .i_w    (i_w[l]),
      .o_prod (o_prod[l]),
      .o_unsup(o_unsup[l])
    );
  end

endmodule
