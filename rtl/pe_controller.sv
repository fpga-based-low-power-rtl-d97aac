// pe_controller: sequences the PE arrays through the two passes of one layer.
//
// One LSTM layer needs eight matrix-vector products (W_x* x and W_h* h for the
// four gates).  The two PE arrays do two of them at a time, so a layer takes
// two passes over the concatenated input [x ; h_{t-1}] of n_in + HID
// elements: pass 0 computes the i and f gates (Bias0 = b_i, Bias1 = b_f),
// pass 1 the o gate and the candidate (b_o, b_c).  Each pass is
//   BIAS  : preload the biases (rstnet),
//   RUN   : one input element and one weight row per clock, x first, then h,
//   WAIT  : last accumulation,
//   STORE : copy the PE outputs into the PE buffer (PE_i/PE_f or PE_o/PE_c).
// so a pass takes n_in + HID + 3 clocks; the weight rows of a layer are read
// in order from wbase.  The paper gives the pass count (n_in*4/2 and
// HID*4/2 clocks per layer) but not this state sequence.
//
// Interface: addresses and read requests are issued in the address phase;
// the weight BRAM and the operand sources answer one clock later, and the
// registered strobes rstnet/en/sel_x line up with that data phase.
module pe_controller
  import rnn_pkg::*;
#(
  parameter int HID     = 256,
  parameter int W_DEPTH = 4402,
  localparam int WAW    = (W_DEPTH > 1) ? $clog2(W_DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IDX_W-1:0] n_in,
  input  logic [WAW-1:0]   wbase,
  input  logic             ext_x,     // layer input comes from the external x port
  output logic             busy,
  output logic             done,      // one-cycle pulse after the second STORE
  // address phase
  output logic             w_re,
  output logic [WAW-1:0]   w_addr,    // Sel_W0 / Sel_W1 (both arrays read the same row)
  output rd_req_t          rd_req,
  output logic             pass,      // Sel_Bias0 / Sel_Bias1
  // data phase
  output logic             rstnet,
  output logic             en,
  output logic             sel_x,     // Sel_IN: 1 = x_t port, 0 = h_{t-1} port
  output logic             buf_wr_if,
  output logic             buf_wr_oc
);

  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_RUN, S_WAIT, S_STORE} state_e;
  state_e state;

  logic [IDX_W-1:0] j, n_in_q, total_q;
  logic             ext_x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pass    <= 1'b0;
      j       <= '0;
      w_addr  <= '0;
      n_in_q  <= '0;
      total_q <= '0;
      ext_x_q <= 1'b0;
      done    <= 1'b0;
      rstnet  <= 1'b0;
      en      <= 1'b0;
      sel_x   <= 1'b0;
    end else begin
      done   <= 1'b0;
      rstnet <= (state == S_BIAS);
      en     <= (state == S_RUN);
      sel_x  <= (state == S_RUN) && ext_x_q && (j < n_in_q);
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_BIAS;
          pass    <= 1'b0;
          w_addr  <= wbase;
          n_in_q  <= n_in;
          total_q <= IDX_W'(n_in + IDX_W'(HID));
          ext_x_q <= ext_x;
        end
        S_BIAS: begin
          j     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          j      <= j + 1'b1;
          w_addr <= w_addr + 1'b1;
          if (j == total_q - 1'b1) state <= S_WAIT;
        end
        S_WAIT: state <= S_STORE;
        S_STORE: begin
          if (!pass) begin
            pass  <= 1'b1;
            state <= S_BIAS;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy        = (state != S_IDLE);
    w_re        = (state == S_RUN);
    rd_req      = '0;
    rd_req.valid = (state == S_RUN);
    if (j < n_in_q) begin
      rd_req.kind = RD_X;
      rd_req.idx  = j;
    end else begin
      rd_req.kind = RD_H;
      rd_req.idx  = j - n_in_q;
    end
    buf_wr_if   = (state == S_STORE) && !pass;
    buf_wr_oc   = (state == S_STORE) && pass;
  end

endmodule
