// pe: one multiply-accumulate processing element of the PE array.
//
// The PE multiplies the broadcast input Din (8-bit signal) with its own weight
// W (6-bit) and adds the product to the partial sum held in the "net"
// register.  Asserting rstnet loads the bias into net instead, so the bias is
// preloaded before the first product of a matrix-vector pass, as in the
// paper's PE diagram (multiplier, adder, a mux choosing Bias or the adder
// output, and the net register).  The accumulate enable `en` is this design's
// addition: it holds net while no valid input is on Din.  The adder
// saturates to 16 bits (the paper does not say how overflow is handled).
//
// Timing: one product per clock; dout is the net register, so a result is
// visible the cycle after the last accumulating edge.
module pe
  import rnn_pkg::*;
(
  input  logic clk,
  input  logic rstnet,  // load bias into net (has priority over en)
  input  logic en,      // accumulate din*w into net
  input  sig_t din,
  input  wgt_t w,
  input  net_t bias,
  output net_t dout
);

  net_t net;
  logic signed [X_W+W_W-1:0] prod;

  always_comb prod = din * w;

  always_ff @(posedge clk) begin
    if (rstnet)  net <= bias;
    else if (en) net <= sat16(32'(net) + 32'(prod));
  end

  assign dout = net;

endmodule
