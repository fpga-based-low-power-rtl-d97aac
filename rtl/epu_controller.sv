// epu_controller: streams one layer's elements through the LSTM EPU.
//
// After the PE controller has filled the PE buffer, this controller reads
// element k = 0 .. HID-1 once per clock: PE buffer address k (Sel_PE),
// peephole BRAM address layer*HID + k (Sel_Peep) and a request for c_{t-1}[k]
// from the context memory.  All three answer one clock later, when the
// element is handed to the EPU with epu_valid.  The controller then counts
// the EPU results and pulses done when all HID have come out, so a layer's
// EPU phase takes HID + EPU latency + 3 clocks from start to done.
module epu_controller
  import rnn_pkg::*;
#(
  parameter int HID = 256,
  parameter int NL  = 5,
  localparam int AW = (HID > 1) ? $clog2(HID) : 1,
  localparam int LW = (NL > 1) ? $clog2(NL) : 1,
  localparam int PAW = (HID*NL > 1) ? $clog2(HID*NL) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LW-1:0]    layer,
  output logic             busy,
  output logic             done,
  // address phase
  output logic             pebuf_re,
  output logic [AW-1:0]    pebuf_addr,  // Sel_PE
  output logic             peep_re,
  output logic [PAW-1:0]   peep_addr,   // Sel_Peep
  output rd_req_t          rd_req,      // c_{t-1}[k]
  // data phase
  output logic             epu_valid,
  output logic [AW-1:0]    epu_idx,
  input  logic             epu_out_valid
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;
  state_e state;

  logic [AW-1:0]  k;
  logic [AW:0]    n_out;
  logic [PAW-1:0] peep_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      k         <= '0;
      n_out     <= '0;
      peep_base <= '0;
      done      <= 1'b0;
      epu_valid <= 1'b0;
      epu_idx   <= '0;
    end else begin
      done      <= 1'b0;
      epu_valid <= (state == S_ISSUE);
      epu_idx   <= k;
      if (epu_out_valid) n_out <= n_out + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_ISSUE;
          k         <= '0;
          n_out     <= '0;
          peep_base <= PAW'(layer) * PAW'(HID);
        end
        S_ISSUE: begin
          k <= k + 1'b1;
          if (k == AW'(HID - 1)) state <= S_DRAIN;
        end
        S_DRAIN: if (n_out == (AW+1)'(HID)) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy         = (state != S_IDLE);
    pebuf_re     = (state == S_ISSUE);
    pebuf_addr   = k;
    peep_re      = (state == S_ISSUE);
    peep_addr    = peep_base + PAW'(k);
    rd_req       = '0;
    rd_req.valid = (state == S_ISSUE);
    rd_req.kind  = RD_C;
    rd_req.idx   = IDX_W'(k);
  end

endmodule
