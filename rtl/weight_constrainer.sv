// weight_constrainer: rounds a synapse weight onto the alphabet set.
//
// An ASM with few alphabets cannot form every quartet value (with {1,3} the
// values 5,7,9,10,11,13,14,15 are missing). This unit moves each
// unsupported quartet to the nearest supported value, the threshold being
// the midpoint of the two supported neighbours, with the midpoint itself
// rounding up: between 8 and 12 the value 9 becomes 8 while 10 and 11
// become 12. Quartets are treated from the least significant one upward. A
// quartet that rounds up to 16 becomes 0 and carries one into the next
// quartet, which is then checked again; this is how rounding R decides the
// rounding of QR and rounding Q decides that of PQR. If the top quartet
// overflows, the magnitude saturates to the largest one whose quartets are
// all supported. The sign is kept: only the magnitude is rounded.
//
// Weights that already fit pass unchanged, so placing the unit on the
// weight path costs nothing in accuracy; the processing engine does so,
// which guarantees that its multipliers see only supported quartets.
//
// Interface: i_w (signed WT_W) -> o_w (signed WT_W), o_changed. Purely
// combinational.
//
// Rounding rule and quartet order follow the paper, which applies them
// offline while retraining. Rounding to nearest rather than down in the
// "round-down R" steps, the saturation on overflow and the use in hardware
// are this design's choices.
module weight_constrainer #(
  parameter int unsigned WT_W      = man_pkg::DEF_WT_W,
  parameter int unsigned NUM_ALPHA = man_pkg::DEF_NUM_ALPHA,
  localparam int unsigned NQ       = man_pkg::num_quartets(WT_W)
) (
  input  logic signed [WT_W-1:0] i_w,
  output logic signed [WT_W-1:0] o_w,
  output logic                   o_changed
);

  import man_pkg::*;

  // Largest supported value of a quartet with `bits` magnitude bits.
  function automatic int unsigned max_supported(input int unsigned bits);
    int unsigned m;
    m = 0;
    for (int unsigned u = 0; u < 16; u++)
      if (u < (1 << bits) && quartet_supported(u, NUM_ALPHA)) m = u;
    return m;
  endfunction

  // Rounds the magnitude quartet by quartet, least significant first.
  function automatic logic [WT_W-2:0] round_mag(input logic [WT_W-2:0] mag);
    logic [WT_W-2:0] new_mag, sat_mag;
    int unsigned     carry, v, bits, qmax, lo, hi, nv;
    new_mag = '0;
    sat_mag = '0;
    carry   = 0;
    for (int unsigned q = 0; q < NQ; q++) begin
      bits = quartet_bits(WT_W, q);
      qmax = 1 << bits;
      v    = ((int'(mag) >> (4 * q)) & (qmax - 1)) + carry;
      lo   = 0;
      hi   = qmax;
      for (int unsigned u = 0; u < 16; u++)
        if (u < v && quartet_supported(u, NUM_ALPHA)) lo = u;
      for (int unsigned u = 15; u > 0; u--)
        if (u > v && u < qmax && quartet_supported(u, NUM_ALPHA)) hi = u;
      if (v == qmax)                             nv = qmax;
      else if (quartet_supported(v, NUM_ALPHA))  nv = v;
      else                                       nv = (2 * v >= lo + hi) ? hi : lo;
      if (nv == qmax) begin nv = 0; carry = 1; end
      else            carry = 0;
      new_mag = new_mag | (WT_W-1)'(nv << (4 * q));
      sat_mag = sat_mag | (WT_W-1)'(max_supported(bits) << (4 * q));
    end
    return (carry != 0) ? sat_mag : new_mag;
  endfunction

  logic [WT_W-2:0] mag, new_mag;

  always_comb begin
    if (i_w == {1'b1, {(WT_W-1){1'b0}}}) mag = '1;
    else if (i_w[WT_W-1])                mag = (WT_W-1)'(-i_w);
    else                                 mag = i_w[WT_W-2:0];
    new_mag   = round_mag(mag);
    o_w       = i_w[WT_W-1] ? -signed'({1'b0, new_mag}) : signed'({1'b0, new_mag});
    o_changed = (o_w != i_w);
  end

endmodule
