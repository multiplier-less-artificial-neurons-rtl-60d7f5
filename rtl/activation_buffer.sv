// activation_buffer: storage for the activations of one layer.
//
// A DEPTH x W array with one synchronous write port and one combinational
// read port. The processing engine owns two of them and alternates: a layer
// reads its inputs from one and writes its neuron outputs to the other.
// The contents are not reset.
//
// The paper does not describe the engine's storage; the size, the ports and
// the ping-pong use are this design's choices.
module activation_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = man_pkg::DEF_IN_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          i_we,
  input  logic [AW-1:0] i_waddr,
  input  logic [W-1:0]  i_wdata,
  input  logic [AW-1:0] i_raddr,
  output logic [W-1:0]  o_rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (i_we) mem[i_waddr] <= i_wdata;

  assign o_rdata = mem[i_raddr];

endmodule
