// precomputer_bank: the bank of pre-computers of an alphabet set multiplier.
//
// From the multiplier input I it produces the alphabets, the odd multiples
// alpha[k] = (2k+1) * I for k = 0 .. NUM_ALPHA-1 (for four alphabets:
// 1I, 3I, 5I, 7I). Each alphabet is formed by shifting and adding copies of
// I, so the bank holds no multiplier: 3I = 2I + I, 5I = 4I + I, 7I = 4I + 2I
// + I, and so on. With NUM_ALPHA = 1 the only alphabet is I itself and the
// bank reduces to wires, as in the multiplier-less neuron.
//
// Interface: i_in (unsigned, IN_W bits) -> o_alpha[NUM_ALPHA], each AL_W =
// IN_W + 4 bits wide, enough for 15I. Purely combinational.
//
// The alphabet set and the sharing of one bank by several multipliers follow
// the paper; the shift-and-add construction of each multiple is this
// design's choice (the paper gives only the bank's function).
module precomputer_bank #(
  parameter int unsigned IN_W      = man_pkg::DEF_IN_W,
  parameter int unsigned NUM_ALPHA = man_pkg::DEF_ASM_ALPHA,
  localparam int unsigned AL_W     = IN_W + 4
) (
  input  logic [IN_W-1:0] i_in,
  output logic [AL_W-1:0] o_alpha [NUM_ALPHA]
);

  initial begin
    assert (NUM_ALPHA inside {1, 2, 4, 8})
      else $error("precomputer_bank: NUM_ALPHA must be 1, 2, 4 or 8");
  end

  always_comb begin
    for (int unsigned k = 0; k < NUM_ALPHA; k++) begin
      logic [3:0] mult;
      mult = 4'(2 * k + 1);
      o_alpha[k] = '0;
      for (int unsigned b = 0; b < 4; b++)
        if (mult[b]) o_alpha[k] = o_alpha[k] + (AL_W'(i_in) << b);
    end
  end

endmodule
