// context_manager: runs one network step and maps every operand onto the
// context memory.
//
// The host issues a command {net, src, dst}: net 0 runs the acoustic model
// (AM_LAYERS layers on the current feature frame), net 1 runs the character
// LM for one beam hypothesis, reading the recurrent state of context slot src
// and writing the new state to slot dst (src = dst updates a hypothesis in
// place; src != dst lets a new hypothesis branch off an existing one).  The
// manager starts the LSTM tile once per layer with that layer's input length
// and first weight row, then the output tile, and pulses cmd_done.
//
// Context memory layout (HID words per layer):
//   acoustic model, layer l        : l*HID + e
//   character LM, slot s, layer l  : AM_LAYERS*HID + (s*LM_LAYERS + l)*HID + e
// Operand requests of the tiles are translated one to one, in the same clock:
//   RD_X of a first layer  -> external x port (feature vector / one-hot char)
//   RD_X of an upper layer -> h of layer l-1 in slot dst (already updated)
//   RD_H, RD_C             -> layer l in slot src
//   output tile RD_H       -> top layer in slot dst
// and every EPU result (c_t, h_t) is written to layer l of slot dst.
// The paper names the context manager as the address source of the context
// memory; the layer sequencing placed here is this design's choice.
// rst_n is also sampled synchronously by the disable-iff clause of the
// read-port assertion; that is simulation-only and not a second reset path.
module context_manager
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
  localparam int OW        = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host command
  input  logic             cmd_valid,
  input  logic             cmd_net,
  input  logic [CW-1:0]    cmd_src,
  input  logic [CW-1:0]    cmd_dst,
  output logic             busy,
  output logic             cmd_done,
  // LSTM tile job
  output logic             tile_start,
  output logic [LW-1:0]    tile_layer,
  output logic [IDX_W-1:0] tile_n_in,
  output logic [WAW-1:0]   tile_wbase,
  output logic             tile_ext_x,
  input  logic             tile_done,
  input  rd_req_t          tile_rd_req,
  input  logic             tile_out_valid,
  input  logic [AW-1:0]    tile_out_idx,
  input  sig_t             tile_h_t,
  input  net_t             tile_c_t,
  // output tile job
  output logic             out_start,
  output logic             out_net,
  output logic [OW:0]      out_n_out,
  input  logic             out_done,
  input  rd_req_t          out_rd_req,
  // context memory
  output logic             ctx_rd_en,
  output logic [CAW-1:0]   ctx_rd_addr,
  output logic             ctx_wr_en,
  output logic [CAW-1:0]   ctx_wr_addr,
  output ctx_t             ctx_wr_data,
  // external layer-0 input
  output logic             x_rd_en,
  output logic [IDX_W-1:0] x_rd_addr
);

  // Input length and first weight row of global layer g (AM layers first).
  function automatic int layer_n_in(input int g);
    if (g == 0)              return AM_IN;
    else if (g == AM_LAYERS) return LM_IN;
    else                     return HID;
  endfunction

  function automatic int layer_wbase(input int g);
    int base;
    base = 0;
    for (int i = 0; i < NL; i++)
      if (i < g) base += layer_rows(layer_n_in(i), HID);
    return base;
  endfunction

  function automatic logic [CAW-1:0] ctx_addr(input logic net, input logic [CW-1:0] slot,
                                              input int lyr, input logic [IDX_W-1:0] e);
    int a;
    if (!net) a = lyr*HID + int'(e);
    else      a = AM_LAYERS*HID + (int'(slot)*LM_LAYERS + lyr)*HID + int'(e);
    return CAW'(a);
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_START_L, S_WAIT_L, S_START_O, S_WAIT_O} state_e;
  state_e state;

  logic          net_q;
  logic [CW-1:0] src_q, dst_q;
  logic [LW-1:0] lyr;        // layer within the selected network
  int            n_layers;

  assign n_layers = net_q ? LM_LAYERS : AM_LAYERS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      net_q    <= 1'b0;
      src_q    <= '0;
      dst_q    <= '0;
      lyr      <= '0;
      cmd_done <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          net_q <= cmd_net;
          src_q <= cmd_src;
          dst_q <= cmd_dst;
          lyr   <= '0;
          state <= S_START_L;
        end
        S_START_L: state <= S_WAIT_L;
        S_WAIT_L: if (tile_done) begin
          if (int'(lyr) == n_layers - 1) state <= S_START_O;
          else begin
            lyr   <= lyr + 1'b1;
            state <= S_START_L;
          end
        end
        S_START_O: state <= S_WAIT_O;
        S_WAIT_O: if (out_done) begin
          cmd_done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  int g;   // global layer index
  always_comb begin
    g          = (net_q ? AM_LAYERS : 0) + int'(lyr);
    busy       = (state != S_IDLE);
    tile_start = (state == S_START_L);
    tile_layer = LW'(g);
    tile_n_in  = IDX_W'(layer_n_in(g));
    tile_wbase = WAW'(layer_wbase(g));
    tile_ext_x = (lyr == '0);
    out_start  = (state == S_START_O);
    out_net    = net_q;
    out_n_out  = net_q ? (OW+1)'(LM_OUT) : (OW+1)'(AM_OUT);
  end

  // operand request translation
  always_comb begin
    ctx_rd_en   = 1'b0;
    ctx_rd_addr = '0;
    x_rd_en     = 1'b0;
    x_rd_addr   = '0;
    if (out_rd_req.valid) begin
      ctx_rd_en   = 1'b1;
      ctx_rd_addr = ctx_addr(net_q, dst_q, n_layers - 1, out_rd_req.idx);
    end else if (tile_rd_req.valid) begin
      if (tile_rd_req.kind == RD_X) begin
        if (lyr == '0) begin
          x_rd_en   = 1'b1;
          x_rd_addr = tile_rd_req.idx;
        end else begin
          ctx_rd_en   = 1'b1;
          ctx_rd_addr = ctx_addr(net_q, dst_q, int'(lyr) - 1, tile_rd_req.idx);
        end
      end else begin
        ctx_rd_en   = 1'b1;
        ctx_rd_addr = ctx_addr(net_q, src_q, int'(lyr), tile_rd_req.idx);
      end
    end
  end

  always_comb begin
    ctx_wr_en     = tile_out_valid;
    ctx_wr_addr   = ctx_addr(net_q, dst_q, int'(lyr), IDX_W'(tile_out_idx));
    ctx_wr_data.c = tile_c_t;
    ctx_wr_data.h = tile_h_t;
  end

  // The two tiles never fetch in the same clock.
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(tile_rd_req.valid && out_rd_req.valid));

endmodule
