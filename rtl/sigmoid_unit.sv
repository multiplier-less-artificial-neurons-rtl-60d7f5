// sigmoid_unit: soft-limiting activation of a neuron.
//
// Maps the signed weighted sum x (fixed point, FRAC fractional bits) to
// y = 1 / (1 + e^-x), output as an unsigned OUT_W-bit fraction (y *
// 2^OUT_W, saturated at 2^OUT_W - 1), which is the input format of the
// next layer. The curve is the piecewise-linear PLAN approximation, built
// from shifts and adds only:
//   |x| >= 5          y = 1
//   2.375 <= |x| < 5  y = |x|/32 + 0.84375
//   1 <= |x| < 2.375  y = |x|/8  + 0.625
//   0 <= |x| < 1      y = |x|/4  + 0.5
// and y(-x) = 1 - y(x). Requires FRAC >= OUT_W and FRAC >= 5.
//
// Interface: i_x (signed ACC_W) -> o_y (unsigned OUT_W). Combinational.
//
// The paper asks only for a logistic sigmoid neuron; the PLAN segments,
// the fixed-point formats and truncation are this design's choices.
module sigmoid_unit #(
  parameter int unsigned ACC_W = 32,
  parameter int unsigned FRAC  = 12,
  parameter int unsigned OUT_W = man_pkg::DEF_IN_W
) (
  input  logic signed [ACC_W-1:0] i_x,
  output logic [OUT_W-1:0]        o_y
);

  localparam logic [ACC_W:0] ONE   = (ACC_W+1)'(1) << FRAC;
  localparam logic [ACC_W:0] X1    = ONE;
  localparam logic [ACC_W:0] X2375 = ((ACC_W+1)'(19) << FRAC) >> 3;
  localparam logic [ACC_W:0] X5    = (ACC_W+1)'(5) << FRAC;
  localparam logic [ACC_W:0] C3    = ((ACC_W+1)'(27) << FRAC) >> 5;
  localparam logic [ACC_W:0] C2    = ((ACC_W+1)'(5) << FRAC) >> 3;
  localparam logic [ACC_W:0] C1    = ONE >> 1;

  logic [ACC_W:0] ax, yp, y;

  always_comb begin
    ax = i_x[ACC_W-1] ? (ACC_W+1)'(-(ACC_W+1)'(i_x)) : (ACC_W+1)'(i_x);
    if      (ax >= X5)    yp = ONE;
    else if (ax >= X2375) yp = (ax >> 5) + C3;
    else if (ax >= X1)    yp = (ax >> 3) + C2;
    else                  yp = (ax >> 2) + C1;
    y = i_x[ACC_W-1] ? ONE - yp : yp;
    if (y >= ONE) o_y = '1;
    else          o_y = OUT_W'(y >> (FRAC - OUT_W));
  end

endmodule
