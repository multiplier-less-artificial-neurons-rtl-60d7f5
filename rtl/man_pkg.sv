// man_pkg: constants and helper functions shared by the alphabet set
// multiplier (ASM) and multiplier-less neuron (MAN) datapath.
//
// A weight is a two's complement word whose magnitude is cut into 4-bit
// "quartets", least significant first. The most significant quartet holds
// the sign bit, so it carries one magnitude bit less (3 bits for the 8- and
// 12-bit weights used here). An ASM built with NUM_ALPHA alphabets owns the
// odd multiples 1,3,...,2*NUM_ALPHA-1 of its input; a quartet value v is
// "supported" when it is 0 or an alphabet shifted left, i.e. when the odd
// part of v is at most 2*NUM_ALPHA-1. With NUM_ALPHA = 1 only 0,1,2,4,8 are
// supported: that is the multiplier-less neuron.
//
// The quartet split, the supported sets and the sign handling follow the
// paper; the fixed-point defaults below are this design's own choices.
package man_pkg;

  // Default neuron size (input and synapse width). The paper evaluates 8 and 12.
  localparam int unsigned DEF_IN_W     = 8;
  localparam int unsigned DEF_WT_W     = 8;
  // Default alphabet count of the engine: 1 = multiplier-less neuron.
  localparam int unsigned DEF_NUM_ALPHA = 1;
  // Default alphabet count of a stand-alone multiplier: {1,3,5,7}, the
  // four-alphabet ASM of the 8-bit example.
  localparam int unsigned DEF_ASM_ALPHA = 4;
  // Neurons processed at a time by one processing unit (paper: four).
  localparam int unsigned DEF_LANES    = 4;
  // Quartet width.
  localparam int unsigned QB           = 4;

  // Number of quartets covering the WT_W-1 magnitude bits of a weight.
  function automatic int unsigned num_quartets(input int unsigned wt_w);
    return (wt_w - 1 + QB - 1) / QB;
  endfunction

  // Magnitude bits held by quartet q of a WT_W-bit weight.
  function automatic int unsigned quartet_bits(input int unsigned wt_w, input int unsigned q);
    int unsigned rem;
    rem = (wt_w - 1) - q * QB;
    return (rem > QB) ? QB : rem;
  endfunction

  // True when quartet value v (0..16) is produced by one alphabet and a shift.
  // v = 16 is never a quartet value; callers treat it as a carry.
  function automatic logic quartet_supported(input int unsigned v, input int unsigned num_alpha);
    int unsigned odd;
    if (v == 0) return 1'b1;
    odd = v;
    for (int i = 0; i < 5; i++)
      if (odd[0] == 1'b0) odd = odd >> 1;
    return (odd <= 2 * num_alpha - 1);
  endfunction

endpackage
