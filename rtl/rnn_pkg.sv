// rnn_pkg: number formats and shared helpers of the LSTM accelerator.
//
// Word lengths follow the paper: weights are 6-bit, signals (x and h) are
// 8-bit, LSTM cells and the PE accumulators are 16-bit, and a context word
// holds one cell value and one output value (16 + 8 = 24 bits).  The binary
// point positions are this design's own choice (the paper gives only the
// word lengths):
//   x, h      : signed Q1.6   (8 bits, 6 fraction bits)
//   weight    : signed Q1.4   (6 bits, 4 fraction bits)
//   net, cell : signed Q5.10  (16 bits, 10 fraction bits) = product format of x*w
//   peephole  : signed Q3.4   (8-bit field of the 24-bit peephole word)
//   sigmoid   : unsigned 0.8  (8 bits, 1.0 saturates to 255/256)
//   tanh      : signed Q0.7   (8 bits)
// Arithmetic right shifts truncate toward minus infinity; sums saturate.
package rnn_pkg;

  localparam int X_W      = 8;
  localparam int W_W      = 6;
  localparam int NET_W    = 16;
  localparam int PEEP_W   = 8;
  localparam int GATE_W   = 8;
  localparam int IDX_W    = 16;            // element index width on request buses
  localparam int LDA_W    = 17;            // address width of the parameter load bus
  localparam int LUT_SHIFT = 6;            // Q5.10 -> LUT step of 1/16

  typedef logic signed [X_W-1:0]    sig_t;
  typedef logic signed [W_W-1:0]    wgt_t;
  typedef logic signed [NET_W-1:0]  net_t;
  typedef logic signed [PEEP_W-1:0] peep_t;
  typedef logic [GATE_W-1:0]        gate_t;

  // One word of the context memory: the cell value c and the output h.
  typedef struct packed {
    net_t c;
    sig_t h;
  } ctx_t;

  // Peephole word: {W_ci, W_cf, W_co}, 8 bits each.
  typedef struct packed {
    peep_t wi;
    peep_t wf;
    peep_t wo;
  } peep_word_t;

  // Which operand an LSTM tile asks for on its read-request bus.
  typedef enum logic [1:0] {
    RD_X = 2'd0,   // layer input x (feature vector or lower layer's new h)
    RD_H = 2'd1,   // this layer's previous output h_{t-1}
    RD_C = 2'd2    // this layer's previous cell c_{t-1}
  } rd_kind_e;

  typedef struct packed {
    logic             valid;
    rd_kind_e         kind;
    logic [IDX_W-1:0] idx;
  } rd_req_t;

  // Targets of the parameter load bus (written by the host before use).
  typedef enum logic [3:0] {
    LD_W0    = 4'd0,
    LD_W1    = 4'd1,
    LD_BI    = 4'd2,
    LD_BF    = 4'd3,
    LD_BO    = 4'd4,
    LD_BC    = 4'd5,
    LD_PEEP  = 4'd6,
    LD_CTX   = 4'd7,
    LD_OUT_W = 4'd8,
    LD_OUT_B = 4'd9
  } ld_target_e;

  // Saturate a wide signed value to 16 bits.
  function automatic net_t sat16(input logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'sh7fff;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return net_t'(v);
  endfunction

  // Address of the 256-entry activation tables: the Q5.10 argument clipped to
  // [-8, 8) in steps of 1/16, as an 8-bit two's-complement number.
  function automatic logic [7:0] lut_addr(input net_t v);
    logic signed [NET_W-1:0] s;
    s = v >>> LUT_SHIFT;
    if (s > 16'sd127)       return 8'h7f;
    else if (s < -16'sd128) return 8'h80;
    else                    return s[7:0];
  endfunction

  // Weight-memory rows of one layer: two passes over (n_in + hid) inputs.
  function automatic int layer_rows(input int n_in, input int hid);
    return 2 * (n_in + hid);
  endfunction

endpackage
