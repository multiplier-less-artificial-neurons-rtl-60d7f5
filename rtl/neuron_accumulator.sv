// neuron_accumulator: the weighted-sum register of one neuron.
//
// i_load starts a new sum from the bias; each cycle with i_en adds one
// signed product. Products and bias share one fixed-point scale; the bias
// arrives already aligned (the engine shifts it). Loading has priority over
// accumulating. The sum wraps at ACC_W bits: ACC_W = 32 leaves 16 bits of
// headroom above a 16-bit product, far more than 1024-input layers need.
//
// Timing: o_acc is registered; it shows a load or an add one cycle later.
// Synchronous active-high reset clears it.
//
// The weighted sum is the paper's; bias loading, width and reset are this
// design's choices.
module neuron_accumulator #(
  parameter int unsigned PROD_W = man_pkg::DEF_IN_W + man_pkg::DEF_WT_W,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     i_load,
  input  logic signed [ACC_W-1:0]  i_bias,
  input  logic                     i_en,
  input  logic signed [PROD_W-1:0] i_prod,
  output logic signed [ACC_W-1:0]  o_acc
);

  always_ff @(posedge clk) begin
    if (rst)         o_acc <= '0;
    else if (i_load) o_acc <= i_bias;
    else if (i_en)   o_acc <= o_acc + ACC_W'(i_prod);
  end

endmodule
