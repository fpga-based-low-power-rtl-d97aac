// context_memory: on-chip store of the recurrent state (c, h) of every layer.
//
// One 24-bit word per LSTM cell holds the 16-bit cell value c and the 8-bit
// output h.  With HID = 256 the default depth is 66,304 words, the size
// printed in the paper's system diagram: 3 acoustic-model layers
// (3 x 256 words) plus 128 character-LM contexts of 2 layers each
// (128 x 2 x 256 words), one context per beam-search hypothesis.  The paper
// shows a single address input; this design gives the memory a separate
// write address (simple dual-port block RAM) so the EPU can write c_t, h_t
// while c_{t-1} of a later element is being read.  Read latency is one clock.
module context_memory
  import rnn_pkg::*;
#(
  parameter int DEPTH = 66304,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  ctx_t          ctx_in,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output ctx_t          ctx_out
);

  ctx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= ctx_in;
    if (rd_en) ctx_out <= mem[rd_addr];
  end

endmodule
