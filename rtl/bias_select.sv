// bias_select: the four gate-bias stores (b_i, b_f, b_o, b_c) and the bias mux.
//
// Each store keeps one HID x 16-bit bias vector per LSTM layer (NL layers of
// both networks).  During the first matrix-vector pass of a layer (pass = 0)
// the PE arrays compute the input and forget gates, so Bias0 = b_i and
// Bias1 = b_f; during the second pass (pass = 1) they compute the output gate
// and the cell candidate, so Bias0 = b_o and Bias1 = b_c.  This pairing is
// this design's reading of the 4-to-2 bias mux in the paper's tile diagram.
// The read is combinational (distributed RAM); layer and pass are held
// steady by the PE controller while a pass runs.  Loading is by the host:
// ld_sel picks the store (0 = b_i, 1 = b_f, 2 = b_o, 3 = b_c), ld_addr the layer.
module bias_select
  import rnn_pkg::*;
#(
  parameter int HID = 256,
  parameter int NL  = 5,
  localparam int LW = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic                      clk,
  input  logic                      ld_we,
  input  logic [1:0]                ld_sel,
  input  logic [LW-1:0]             ld_addr,
  input  logic [HID*NET_W-1:0]      ld_data,
  input  logic [LW-1:0]             layer,
  input  logic                      pass,
  output logic [HID-1:0][NET_W-1:0] bias0,
  output logic [HID-1:0][NET_W-1:0] bias1
);

  logic [HID*NET_W-1:0] b_i [NL];
  logic [HID*NET_W-1:0] b_f [NL];
  logic [HID*NET_W-1:0] b_o [NL];
  logic [HID*NET_W-1:0] b_c [NL];

  always_ff @(posedge clk) begin
    if (ld_we) begin
      case (ld_sel)
        2'd0:    b_i[ld_addr] <= ld_data;
        2'd1:    b_f[ld_addr] <= ld_data;
        2'd2:    b_o[ld_addr] <= ld_data;
        default: b_c[ld_addr] <= ld_data;
      endcase
    end
  end

  always_comb begin
    bias0 = pass ? b_o[layer] : b_i[layer];
    bias1 = pass ? b_c[layer] : b_f[layer];
  end

endmodule
