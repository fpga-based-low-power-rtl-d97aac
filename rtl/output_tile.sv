// output_tile: the fully connected output layer of both networks.
//
// y = W_y h + b_y for the top LSTM layer's new output h (HID elements, read
// from the context memory).  The paper says only that this tile is a fully
// connected layer built like the earlier DNN accelerator it cites; this design
// reuses the LSTM tile's outer-product scheme: N_OUT PEs (the same pe module)
// get one h element per clock and one N_OUT x 6-bit weight row.  Rows
// 0 .. HID-1 hold the acoustic model's weights (31 outputs: 26 letters,
// 3 punctuation marks, end of sentence, CTC blank), rows HID .. 2*HID-1 the
// character LM's (30 outputs); bias vector 0 / 1 likewise.  The 16-bit
// results are then sent out one per clock on y_valid/y_idx/y_data
// (probabilities are formed by the host; no softmax here).
//
// Timing: the first y appears HID + 4 clocks after start (bias preload,
// HID requests, two clocks to finish the last product), then one per clock.
module output_tile
  import rnn_pkg::*;
#(
  parameter int HID   = 256,
  parameter int N_OUT = 31,
  localparam int WAW  = (2*HID > 1) ? $clog2(2*HID) : 1,
  localparam int AW   = (HID > 1) ? $clog2(HID) : 1,
  localparam int OW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   net_sel,    // 0 = acoustic model, 1 = character LM
  input  logic [OW:0]            n_out,      // outputs to emit (<= N_OUT)
  output logic                   busy,
  output logic                   done,
  output rd_req_t                rd_req,     // RD_H of the top layer, element idx
  input  sig_t                   h_in,       // answer, one clock later
  output logic                   y_valid,
  output logic [OW-1:0]          y_idx,
  output net_t                   y_data,
  // parameter load
  input  logic                   w_we,
  input  logic [WAW-1:0]         w_addr,
  input  logic [N_OUT*W_W-1:0]   w_data,
  input  logic                   b_we,
  input  logic                   b_addr,
  input  logic [N_OUT*NET_W-1:0] b_data
);

  typedef enum logic [2:0] {S_IDLE, S_BIAS, S_RUN, S_WAIT, S_EMIT} state_e;
  state_e state;

  logic [AW-1:0]  k;
  logic [OW:0]    j, n_out_q;
  logic           net_q;
  logic           rstnet, en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      j       <= '0;
      n_out_q <= '0;
      net_q   <= 1'b0;
      rstnet  <= 1'b0;
      en      <= 1'b0;
      done    <= 1'b0;
    end else begin
      done   <= 1'b0;
      rstnet <= (state == S_BIAS);
      en     <= (state == S_RUN);
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_BIAS;
          net_q   <= net_sel;
          n_out_q <= n_out;
        end
        S_BIAS: begin
          k     <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (k == AW'(HID - 1)) state <= S_WAIT;
        end
        S_WAIT: if (!en) begin           // last product accumulated
          j     <= '0;
          state <= S_EMIT;
        end
        S_EMIT: begin
          j <= j + 1'b1;
          if (j == n_out_q - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    rd_req       = '0;
    rd_req.valid = (state == S_RUN);
    rd_req.kind  = RD_H;
    rd_req.idx   = IDX_W'(k);
  end

  // weights and biases
  logic [N_OUT*W_W-1:0]   w_row;
  logic [N_OUT*NET_W-1:0] bias_mem [2];

  sdp_ram #(.DEPTH(2*HID), .WIDTH(N_OUT*W_W)) u_wmem (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_data),
    .re(state == S_RUN), .raddr({net_q, k}), .rdata(w_row)
  );

  always_ff @(posedge clk) if (b_we) bias_mem[b_addr] <= b_data;

  // PEs
  net_t y_vec [N_OUT];
  logic [N_OUT*NET_W-1:0] bias_row;
  assign bias_row = bias_mem[net_q];

  for (genvar n = 0; n < N_OUT; n++) begin : g_pe
    pe u_pe (
      .clk, .rstnet, .en, .din(h_in),
      .w(wgt_t'(w_row[n*W_W +: W_W])), .bias(net_t'(bias_row[n*NET_W +: NET_W])),
      .dout(y_vec[n])
    );
  end

  // serial output
  always_comb begin
    y_valid = (state == S_EMIT);
    y_idx   = OW'(j);
    y_data  = y_vec[OW'(j)];
  end

endmodule
