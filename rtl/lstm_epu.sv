// lstm_epu: the LSTM extra processing unit, one vector element per clock.
//
// It finishes the LSTM step of Algorithm 1 from the four PE-buffer values of
// one element (the matrix-vector sums with bias, PE_i, PE_f, PE_o, PE_c), the
// element's previous cell c_{t-1} and its three peephole weights:
//   i  = sigmoid(PE_i + w_ci * c_{t-1})
//   f  = sigmoid(PE_f + w_cf * c_{t-1})
//   g  = tanh(PE_c)
//   c_t = f * c_{t-1} + i * g
//   o  = sigmoid(PE_o + w_co * c_t)
//   h_t = o * tanh(c_t)
// This is the dataflow of the paper's EPU diagram: three sigmoid and two tanh
// lookup tables, the peephole multipliers and the cell update.  The
// six-stage pipeline split and the rounding (truncating shifts, 16-bit
// saturation of the sums) are this design's choices; number formats are
// listed in rnn_pkg.
//
// Timing: accepts one element per clock when in_valid is high; the result
// appears LAT = 6 cycles later with out_valid and the element index echoed.
module lstm_epu
  import rnn_pkg::*;
#(
  parameter int IW = 8    // width of the element index carried along
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [IW-1:0] in_idx,
  input  net_t          c_prev,
  input  net_t          pe_i,
  input  net_t          pe_f,
  input  net_t          pe_o,
  input  net_t          pe_c,
  input  peep_word_t    peep,
  output logic          out_valid,
  output logic [IW-1:0] out_idx,
  output sig_t          h_t,
  output net_t          c_t
);

  localparam int LAT = 6;

  // valid / index shift register
  logic [LAT-1:0]  v_q;
  logic [IW-1:0]   idx_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LAT-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    idx_q[0] <= in_idx;
    for (int s = 1; s < LAT; s++) idx_q[s] <= idx_q[s-1];
  end

  // Peephole product c * w (Q5.10 x Q3.4 -> Q?.14) back to Q5.10.
  function automatic logic signed [31:0] peep_term(input net_t c, input peep_t w);
    logic signed [31:0] p;
    p = 32'(c) * 32'(w);
    return p >>> 4;
  endfunction

  // Stage 1: gate pre-activations of i and f with peephole terms.
  net_t s1_pi, s1_pf, s1_c, s1_po, s1_pc;
  peep_t s1_wo;
  always_ff @(posedge clk) begin
    s1_pi <= sat16(32'(pe_i) + peep_term(c_prev, peep.wi));
    s1_pf <= sat16(32'(pe_f) + peep_term(c_prev, peep.wf));
    s1_c  <= c_prev;
    s1_po <= pe_o;
    s1_pc <= pe_c;
    s1_wo <= peep.wo;
  end

  // Stage 2: sigmoid(i), sigmoid(f), tanh(candidate).
  gate_t lut_i, lut_f, lut_g;
  act_lut #(.FUNC(1'b0)) u_sig_i (.addr(lut_addr(s1_pi)), .y(lut_i));
  act_lut #(.FUNC(1'b0)) u_sig_f (.addr(lut_addr(s1_pf)), .y(lut_f));
  act_lut #(.FUNC(1'b1)) u_tanh_g (.addr(lut_addr(s1_pc)), .y(lut_g));

  gate_t s2_i, s2_f;
  sig_t  s2_g;
  net_t  s2_c, s2_po;
  peep_t s2_wo;
  always_ff @(posedge clk) begin
    s2_i  <= lut_i;
    s2_f  <= lut_f;
    s2_g  <= sig_t'(lut_g);
    s2_c  <= s1_c;
    s2_po <= s1_po;
    s2_wo <= s1_wo;
  end

  // Stage 3: cell update c_t = f*c_{t-1} + i*g.
  logic signed [31:0] fc, ig;
  always_comb begin
    fc = (32'(s2_c) * 32'(signed'({1'b0, s2_f}))) >>> 8;   // 0.8 x Q5.10
    ig = (32'(s2_g) * 32'(signed'({1'b0, s2_i}))) >>> 5;   // Q0.7 x 0.8 -> Q.15 -> Q.10
  end

  net_t  s3_c, s3_po;
  peep_t s3_wo;
  always_ff @(posedge clk) begin
    s3_c  <= sat16(fc + ig);
    s3_po <= s2_po;
    s3_wo <= s2_wo;
  end

  // Stage 4: output-gate pre-activation with peephole on c_t; tanh(c_t).
  gate_t lut_tc;
  act_lut #(.FUNC(1'b1)) u_tanh_c (.addr(lut_addr(s3_c)), .y(lut_tc));

  net_t s4_po, s4_c;
  sig_t s4_tc;
  always_ff @(posedge clk) begin
    s4_po <= sat16(32'(s3_po) + peep_term(s3_c, s3_wo));
    s4_c  <= s3_c;
    s4_tc <= sig_t'(lut_tc);
  end

  // Stage 5: sigmoid(o).
  gate_t lut_o;
  act_lut #(.FUNC(1'b0)) u_sig_o (.addr(lut_addr(s4_po)), .y(lut_o));

  gate_t s5_o;
  sig_t  s5_tc;
  net_t  s5_c;
  always_ff @(posedge clk) begin
    s5_o  <= lut_o;
    s5_tc <= s4_tc;
    s5_c  <= s4_c;
  end

  // Stage 6: h_t = o * tanh(c_t)  (0.8 x Q0.7 = Q.15 -> Q1.6).
  logic signed [31:0] oh;
  always_comb oh = (32'(s5_tc) * 32'(signed'({1'b0, s5_o}))) >>> 9;

  always_ff @(posedge clk) begin
    h_t <= sig_t'(oh);
    c_t <= s5_c;
  end

  assign out_valid = v_q[LAT-1];
  assign out_idx   = idx_q[LAT-1];

endmodule
