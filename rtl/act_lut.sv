// act_lut: 256-entry activation lookup table (logistic sigmoid or tanh).
//
// The LSTM EPU evaluates its activation functions with lookup tables, as the
// paper states.  The address is the Q5.10 argument clipped to [-8, 8) in steps
// of 1/16 (rnn_pkg::lut_addr); entry a holds f(x) for x = s/16, where s is a
// read as an 8-bit two's-complement number:
//   sigmoid: min(255, floor(256 / (1 + exp(-x)) + 0.5))            unsigned 0.8
//   tanh   : clamp(floor(128 * tanh(x) + 0.5), -128, 127)         signed Q0.7
// The table is computed at elaboration time by a constant function, so it
// becomes a ROM; the read is combinational.  FUNC selects the table
// (0 = sigmoid, 1 = tanh).
module act_lut
  import rnn_pkg::*;
#(
  parameter bit FUNC = 1'b0
) (
  input  logic [7:0] addr,
  output gate_t      y
);

  typedef gate_t table_t [256];

  function automatic table_t make_table(input bit is_tanh);
    table_t t;
    for (int a = 0; a < 256; a++) begin
      real x, e, r;
      int  q;
      x = real'((a < 128) ? a : a - 256) / 16.0;
      if (is_tanh) begin
        e = $exp(2.0 * x);
        r = 128.0 * (e - 1.0) / (e + 1.0);
        q = int'($floor(r + 0.5));
        if (q > 127)  q = 127;
        if (q < -128) q = -128;
      end else begin
        r = 256.0 / (1.0 + $exp(-x));
        q = int'($floor(r + 0.5));
        if (q > 255) q = 255;
      end
      t[a] = gate_t'(q);
    end
    return t;
  endfunction

  localparam table_t ROM = make_table(FUNC);

  assign y = ROM[addr];

endmodule
