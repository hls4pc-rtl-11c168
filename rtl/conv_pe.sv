// conv_pe -- processing element of a convolution / MLP layer: a multiply-accumulate unit
// followed by a bias adder.
//
// Each clock with `mac_en` high multiplies one A_BITS activation by one W_BITS weight and adds
// the product to the accumulator; with `first` also high the accumulator is loaded with the
// product instead (start of a new output). `psum` is the accumulator plus the bias,
// formed combinationally, so it is valid the clock after the last MAC. The batch-norm of
// the model is folded into the weights and the bias offline, so no further arithmetic is
// needed here. MAC followed by a bias ADD giving PSUM is as the paper draws the PE, and the
// precisions are compile-time parameters as in the paper (default 8/8 bits); the
// accumulator width ACC_W (8 guard bits) and bias width are this design's choices.
module conv_pe
  import hls4pc_pkg::*;
#(
  parameter int unsigned A_BITS = COORD_W,
  parameter int unsigned W_BITS = WGT_W,
  parameter int unsigned ACC_W  = A_BITS + W_BITS + 8,
  parameter int unsigned BIAS_W = A_BITS + W_BITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    mac_en,
  input  logic                    first,
  input  logic signed [A_BITS-1:0] act,
  input  logic signed [W_BITS-1:0] wgt,
  input  logic signed [BIAS_W-1:0] bias,
  output logic signed [ACC_W-1:0] psum
);
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] prod;

  assign prod = ACC_W'(act * wgt);
  assign psum = acc + ACC_W'(bias);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (mac_en) acc <= first ? prod : acc + prod;
  end
endmodule
