// pe_buffer: the PE output buffer with its four sections PE_i, PE_f, PE_o, PE_c.
//
// At the end of the first pass of a layer the whole of PE_OUT0 is written into
// PE_i and PE_OUT1 into PE_f (wr_if); at the end of the second pass PE_OUT0
// goes to PE_o and PE_OUT1 to PE_c (wr_oc).  The LSTM EPU controller then
// reads element addr of all four sections at once, one element per clock,
// with a one-cycle registered read.  Because the results are parked here, the
// PE arrays are free again as soon as a pass is stored.
module pe_buffer
  import rnn_pkg::*;
#(
  parameter int HID = 256,
  localparam int AW = (HID > 1) ? $clog2(HID) : 1
) (
  input  logic                      clk,
  input  logic                      wr_if,
  input  logic                      wr_oc,
  input  logic [HID-1:0][NET_W-1:0] pe_out0,
  input  logic [HID-1:0][NET_W-1:0] pe_out1,
  input  logic                      re,
  input  logic [AW-1:0]             addr,
  output net_t                      pe_i,
  output net_t                      pe_f,
  output net_t                      pe_o,
  output net_t                      pe_c
);

  logic [HID-1:0][NET_W-1:0] buf_i, buf_f, buf_o, buf_c;

  always_ff @(posedge clk) begin
    if (wr_if) begin
      buf_i <= pe_out0;
      buf_f <= pe_out1;
    end
    if (wr_oc) begin
      buf_o <= pe_out0;
      buf_c <= pe_out1;
    end
    if (re) begin
      pe_i <= buf_i[addr];
      pe_f <= buf_f[addr];
      pe_o <= buf_o[addr];
      pe_c <= buf_c[addr];
    end
  end

endmodule
