// rnn_accel_top: the RNN engine of the speech recognizer.
//
// One LSTM tile, one context memory, one context manager and one output tile
// (the paper's system diagram).  The tile holds the weights of both LSTM
// networks -- the acoustic model (3 x 256 LSTM, 123 inputs, 31 outputs) and
// the character LM (2 x 256 LSTM, 30 one-hot inputs, 30 outputs) -- and runs
// either one whenever the host issues a command.  The recurrent state of the
// acoustic model and of 128 LM contexts, one per beam-search hypothesis,
// stays in the context memory, so no step touches external DRAM.
//
// Host interface:
//   ld_*      parameter / context load bus, used while idle.  ld_target picks
//             the memory, ld_addr the row, ld_data (max(HID, N_OUT) x 16
//             bits) carries the row in its low bits (weight row: HID x 6 bits; bias: HID x 16 bits of one
//             layer, ld_addr = global layer 0..4; peephole: {w_ci,w_cf,w_co}
//             at layer*HID + element; context: {c,h} at the context-memory
//             address; output weights: N_OUT x 6 bits, row net*HID + element;
//             output bias: N_OUT x 16 bits, ld_addr = net).
//   cmd_*     start one step: cmd_net 0 = acoustic model on the current
//             frame, 1 = character LM from context cmd_src into cmd_dst.
//   x_*       the tile fetches layer-0 input element x_rd_addr when x_rd_en
//             is high; the host must drive it on x_t on the next clock.
//   y_*       the output layer's 16-bit results, one per clock, then cmd_done.
// Per-command latency (defaults, measured in simulation): 3,918 clocks for the
// acoustic model and 2,434 for the LM, from cmd_valid to cmd_done.  The
// PE-array share is 2,806 and 1,596 clocks as in the paper; the rest is the
// EPU phase of each layer (HID + 11 clocks), which this design does not
// overlap with the next layer's PE passes, and the output layer.
// The block structure and the widths of the data paths follow the paper's
// system diagram; the host interface, the command format and the context
// layout are this design's own.
// The busy outputs of the LSTM tile and the output tile are left open: the
// context manager's own busy covers the whole command.  rst_n also feeds the
// disable-iff clause of the load-bus assertion (simulation only).
module rnn_accel_top
  import rnn_pkg::*;
#(
  parameter int HID       = 256,
  parameter int AM_IN     = 123,
  parameter int LM_IN     = 30,
  parameter int AM_LAYERS = 3,
  parameter int LM_LAYERS = 2,
  parameter int N_CTX     = 128,
  parameter int AM_OUT    = 31,
  parameter int LM_OUT    = 30,
  localparam int NL        = AM_LAYERS + LM_LAYERS,
  localparam int W_DEPTH   = 2*(AM_IN + HID) + 2*(AM_LAYERS-1)*2*HID
                           + 2*(LM_IN + HID) + 2*(LM_LAYERS-1)*2*HID,
  localparam int CTX_DEPTH = HID * (AM_LAYERS + N_CTX*LM_LAYERS),
  localparam int N_OUT     = (AM_OUT > LM_OUT) ? AM_OUT : LM_OUT,
  localparam int WAW       = (W_DEPTH > 1) ? $clog2(W_DEPTH) : 1,
  localparam int LW        = (NL > 1) ? $clog2(NL) : 1,
  localparam int CW        = (N_CTX > 1) ? $clog2(N_CTX) : 1,
  localparam int CAW       = (CTX_DEPTH > 1) ? $clog2(CTX_DEPTH) : 1,
  localparam int AW        = (HID > 1) ? $clog2(HID) : 1,
  localparam int OW        = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int OWAW      = (2*HID > 1) ? $clog2(2*HID) : 1,
  localparam int LD_W      = ((HID > N_OUT) ? HID : N_OUT) * NET_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // parameter load
  input  logic                 ld_we,
  input  ld_target_e           ld_target,
  input  logic [LDA_W-1:0]     ld_addr,
  input  logic [LD_W-1:0]      ld_data,
  // command
  input  logic                 cmd_valid,
  input  logic                 cmd_net,
  input  logic [CW-1:0]        cmd_src,
  input  logic [CW-1:0]        cmd_dst,
  output logic                 busy,
  output logic                 cmd_done,
  // layer-0 input x_t
  output logic                 x_rd_en,
  output logic [IDX_W-1:0]     x_rd_addr,
  input  sig_t                 x_t,
  // output y_t
  output logic                 y_valid,
  output logic [OW-1:0]        y_idx,
  output net_t                 y_data
);

  // LSTM tile
  logic             tile_start, tile_done, tile_ext_x;
  logic [LW-1:0]    tile_layer;
  logic [IDX_W-1:0] tile_n_in;
  logic [WAW-1:0]   tile_wbase;
  rd_req_t          tile_rd_req, out_rd_req;
  logic             tile_out_valid;
  logic [AW-1:0]    tile_out_idx;
  sig_t             tile_h_t;
  net_t             tile_c_t;
  ctx_t             ctx_out;

  lstm_tile #(.HID(HID), .NL(NL), .W_DEPTH(W_DEPTH)) u_lstm_tile (
    .clk, .rst_n,
    .start(tile_start), .layer(tile_layer), .n_in(tile_n_in), .wbase(tile_wbase),
    .ext_x(tile_ext_x), .busy(), .done(tile_done),
    .rd_req(tile_rd_req), .x_t, .h_prev(ctx_out.h), .c_prev(ctx_out.c),
    .out_valid(tile_out_valid), .out_idx(tile_out_idx), .h_t(tile_h_t), .c_t(tile_c_t),
    .ld_we, .ld_target, .ld_addr, .ld_data(ld_data[HID*NET_W-1:0])
  );

  // context manager
  logic           out_start, out_net, out_done;
  logic [OW:0]    out_n_out;
  logic           cm_rd_en, cm_wr_en;
  logic [CAW-1:0] cm_rd_addr, cm_wr_addr;
  ctx_t           cm_wr_data;

  context_manager #(
    .HID(HID), .AM_IN(AM_IN), .LM_IN(LM_IN), .AM_LAYERS(AM_LAYERS),
    .LM_LAYERS(LM_LAYERS), .N_CTX(N_CTX), .AM_OUT(AM_OUT), .LM_OUT(LM_OUT)
  ) u_ctx_mgr (
    .clk, .rst_n,
    .cmd_valid, .cmd_net, .cmd_src, .cmd_dst, .busy, .cmd_done,
    .tile_start, .tile_layer, .tile_n_in, .tile_wbase, .tile_ext_x, .tile_done,
    .tile_rd_req, .tile_out_valid, .tile_out_idx, .tile_h_t, .tile_c_t,
    .out_start, .out_net, .out_n_out, .out_done, .out_rd_req,
    .ctx_rd_en(cm_rd_en), .ctx_rd_addr(cm_rd_addr),
    .ctx_wr_en(cm_wr_en), .ctx_wr_addr(cm_wr_addr), .ctx_wr_data(cm_wr_data),
    .x_rd_en, .x_rd_addr
  );

  // context memory; the host may write it (reset of contexts) while idle
  logic           ctx_wr_en;
  logic [CAW-1:0] ctx_wr_addr;
  ctx_t           ctx_in;

  always_comb begin
    if (ld_we && ld_target == LD_CTX) begin
      ctx_wr_en   = 1'b1;
      ctx_wr_addr = CAW'(ld_addr);
      ctx_in      = ctx_t'(ld_data[$bits(ctx_t)-1:0]);
    end else begin
      ctx_wr_en   = cm_wr_en;
      ctx_wr_addr = cm_wr_addr;
      ctx_in      = cm_wr_data;
    end
  end

  context_memory #(.DEPTH(CTX_DEPTH)) u_ctx_mem (
    .clk, .wr_en(ctx_wr_en), .wr_addr(ctx_wr_addr), .ctx_in,
    .rd_en(cm_rd_en), .rd_addr(cm_rd_addr), .ctx_out
  );

  // output tile
  output_tile #(.HID(HID), .N_OUT(N_OUT)) u_out_tile (
    .clk, .rst_n, .start(out_start), .net_sel(out_net), .n_out(out_n_out),
    .busy(), .done(out_done), .rd_req(out_rd_req), .h_in(ctx_out.h),
    .y_valid, .y_idx, .y_data,
    .w_we(ld_we && ld_target == LD_OUT_W), .w_addr(OWAW'(ld_addr)),
    .w_data(ld_data[N_OUT*W_W-1:0]),
    .b_we(ld_we && ld_target == LD_OUT_B), .b_addr(ld_addr[0]),
    .b_data(ld_data[N_OUT*NET_W-1:0])
  );

  // Parameters and contexts may only be loaded while no step is running.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) !(ld_we && busy));

endmodule
