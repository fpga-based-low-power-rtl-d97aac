// pe_array: the two PE arrays of the LSTM tile (PE0[0..HID-1], PE1[0..HID-1]).
//
// Every PE of both arrays receives the same input element PE_IN each clock
// (outer-product method); PE0[k] takes the k-th 6-bit field of weight0 and
// bias0, PE1[k] that of weight1 and bias1.  With HID = 256 the buses are the
// paper's 1,536-bit weight rows and 4,096-bit bias and output vectors.  One
// input element per clock updates 2*HID partial sums, so a pass over an
// N-element input vector computes two HID x N matrix-vector products in N
// clocks.  rstnet loads the biases, en accumulates; both are shared by all PEs.
module pe_array
  import rnn_pkg::*;
#(
  parameter int HID = 256
) (
  input  logic                        clk,
  input  logic                        rstnet,
  input  logic                        en,
  input  sig_t                        pe_in,
  input  logic [HID-1:0][W_W-1:0]     weight0,
  input  logic [HID-1:0][W_W-1:0]     weight1,
  input  logic [HID-1:0][NET_W-1:0]   bias0,
  input  logic [HID-1:0][NET_W-1:0]   bias1,
  output logic [HID-1:0][NET_W-1:0]   pe_out0,
  output logic [HID-1:0][NET_W-1:0]   pe_out1
);

  for (genvar k = 0; k < HID; k++) begin : g_pe
    pe u_pe0 (
      .clk, .rstnet, .en, .din(pe_in),
      .w(wgt_t'(weight0[k])), .bias(net_t'(bias0[k])), .dout(pe_out0[k])
    );
    pe u_pe1 (
      .clk, .rstnet, .en, .din(pe_in),
      .w(wgt_t'(weight1[k])), .bias(net_t'(bias1[k])), .dout(pe_out1[k])
    );
  end

endmodule
