// lstm_tile: computes one time step of one LSTM layer with peephole connections.
//
// The tile holds every weight of every LSTM layer of both networks (acoustic
// model and character LM) on chip, and is reused for all of them: the host
// (through the context manager) starts it once per layer with that layer's
// global index, input length n_in, first weight row wbase and whether its
// input x comes from the external x_t port (first layer) or from the
// context memory (upper layers).
//
// Inside, following the paper's tile diagram: the PE controller runs the two
// PE arrays through two passes over [x ; h_{t-1}] (Weight0/Weight1 BRAMs, the
// bias stores and the Sel_IN mux feed them), the results are parked in the PE
// buffer, and the EPU controller then streams the HID elements through the
// LSTM EPU with the peephole weights and c_{t-1}.  h_t and c_t come out one
// element per clock on out_valid/out_idx for the context memory.  In this
// design the two phases of a layer run one after the other; the PE array is
// idle during the EPU phase.
//
// Operands are fetched through rd_req (kind RD_X, RD_H or RD_C, element
// index); the answer must arrive one clock later on x_t (RD_X of a first
// layer) or on h_prev / c_prev (everything else).
// Latency of one layer: 2*(n_in + HID + 3) + HID + 8 clocks, start to done.
module lstm_tile
  import rnn_pkg::*;
#(
  parameter int HID     = 256,
  parameter int NL      = 5,
  parameter int W_DEPTH = 4402,
  localparam int WAW    = (W_DEPTH > 1) ? $clog2(W_DEPTH) : 1,
  localparam int LW     = (NL > 1) ? $clog2(NL) : 1,
  localparam int AW     = (HID > 1) ? $clog2(HID) : 1,
  localparam int PDEPTH = HID * NL,
  localparam int PAW    = (PDEPTH > 1) ? $clog2(PDEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // layer job
  input  logic                 start,
  input  logic [LW-1:0]        layer,
  input  logic [IDX_W-1:0]     n_in,
  input  logic [WAW-1:0]       wbase,
  input  logic                 ext_x,
  output logic                 busy,
  output logic                 done,
  // operand fetch
  output rd_req_t              rd_req,
  input  sig_t                 x_t,
  input  sig_t                 h_prev,
  input  net_t                 c_prev,
  // results
  output logic                 out_valid,
  output logic [AW-1:0]        out_idx,
  output sig_t                 h_t,
  output net_t                 c_t,
  // parameter load (LD_W0, LD_W1, LD_BI..LD_BC, LD_PEEP)
  input  logic                 ld_we,
  input  ld_target_e           ld_target,
  input  logic [LDA_W-1:0]     ld_addr,
  input  logic [HID*NET_W-1:0] ld_data
);

  // ---------------------------------------------------------------- control
  logic       pe_start, pe_busy, pe_done;
  logic       epu_busy, epu_done;
  logic [LW-1:0] layer_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) layer_q <= '0;
    else if (start && !busy) layer_q <= layer;
  end

  assign pe_start = start && !busy;
  assign busy     = pe_busy || epu_busy;
  assign done     = epu_done;

  logic             w_re;
  logic [WAW-1:0]   w_addr;
  rd_req_t          pe_req, epu_req;
  logic             pass, rstnet, en, sel_x, buf_wr_if, buf_wr_oc;

  pe_controller #(.HID(HID), .W_DEPTH(W_DEPTH)) u_pe_ctrl (
    .clk, .rst_n, .start(pe_start), .n_in, .wbase, .ext_x,
    .busy(pe_busy), .done(pe_done),
    .w_re, .w_addr, .rd_req(pe_req), .pass,
    .rstnet, .en, .sel_x, .buf_wr_if, .buf_wr_oc
  );

  logic            pebuf_re, peep_re, epu_in_valid;
  logic [AW-1:0]   pebuf_addr, epu_in_idx;
  logic [PAW-1:0]  peep_addr;

  epu_controller #(.HID(HID), .NL(NL)) u_epu_ctrl (
    .clk, .rst_n, .start(pe_done), .layer(layer_q),
    .busy(epu_busy), .done(epu_done),
    .pebuf_re, .pebuf_addr, .peep_re, .peep_addr, .rd_req(epu_req),
    .epu_valid(epu_in_valid), .epu_idx(epu_in_idx), .epu_out_valid(out_valid)
  );

  assign rd_req = pe_req.valid ? pe_req : epu_req;

  // --------------------------------------------------------------- weights
  logic [HID*W_W-1:0] w0_row, w1_row;

  sdp_ram #(.DEPTH(W_DEPTH), .WIDTH(HID*W_W)) u_weight0 (
    .clk, .we(ld_we && ld_target == LD_W0), .waddr(WAW'(ld_addr)),
    .wdata(ld_data[HID*W_W-1:0]), .re(w_re), .raddr(w_addr), .rdata(w0_row)
  );

  sdp_ram #(.DEPTH(W_DEPTH), .WIDTH(HID*W_W)) u_weight1 (
    .clk, .we(ld_we && ld_target == LD_W1), .waddr(WAW'(ld_addr)),
    .wdata(ld_data[HID*W_W-1:0]), .re(w_re), .raddr(w_addr), .rdata(w1_row)
  );

  logic [HID-1:0][NET_W-1:0] bias0, bias1;
  logic bias_we;
  logic [1:0] bias_sel;

  always_comb begin
    bias_we  = ld_we && (ld_target inside {LD_BI, LD_BF, LD_BO, LD_BC});
    bias_sel = 2'(ld_target - LD_BI);
  end

  bias_select #(.HID(HID), .NL(NL)) u_bias (
    .clk, .ld_we(bias_we), .ld_sel(bias_sel), .ld_addr(LW'(ld_addr)), .ld_data,
    .layer(layer_q), .pass, .bias0, .bias1
  );

  // --------------------------------------------------------------- PE array
  sig_t pe_in;
  assign pe_in = sel_x ? x_t : h_prev;   // Sel_IN mux

  logic [HID-1:0][NET_W-1:0] pe_out0, pe_out1;

  pe_array #(.HID(HID)) u_pe_array (
    .clk, .rstnet, .en, .pe_in,
    .weight0(w0_row), .weight1(w1_row), .bias0, .bias1,
    .pe_out0, .pe_out1
  );

  // -------------------------------------------------------------- PE buffer
  net_t pe_i, pe_f, pe_o, pe_c;

  pe_buffer #(.HID(HID)) u_pe_buffer (
    .clk, .wr_if(buf_wr_if), .wr_oc(buf_wr_oc), .pe_out0, .pe_out1,
    .re(pebuf_re), .addr(pebuf_addr), .pe_i, .pe_f, .pe_o, .pe_c
  );

  // --------------------------------------------------------------- peephole
  peep_word_t peep;

  sdp_ram #(.DEPTH(PDEPTH), .WIDTH(3*PEEP_W)) u_peep (
    .clk, .we(ld_we && ld_target == LD_PEEP), .waddr(PAW'(ld_addr)),
    .wdata(ld_data[3*PEEP_W-1:0]), .re(peep_re), .raddr(peep_addr), .rdata(peep)
  );

  // -------------------------------------------------------------------- EPU
  lstm_epu #(.IW(AW)) u_epu (
    .clk, .rst_n, .in_valid(epu_in_valid), .in_idx(epu_in_idx),
    .c_prev, .pe_i, .pe_f, .pe_o, .pe_c, .peep,
    .out_valid, .out_idx, .h_t, .c_t
  );

endmodule
