// tb_lstm_epu: streams random elements through the EPU, one per clock with
// random gaps, and compares h_t and c_t with the reference equations
// (floating-point sigmoid/tanh quantised like the lookup tables).  Also
// checks the six-clock latency and the echoed element index.
module tb_lstm_epu;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;

  localparam int LAT = 6;
  localparam int N   = 2000;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, out_valid;
  logic [7:0] in_idx, out_idx;
  net_t c_prev, pe_i, pe_f, pe_o, pe_c, c_t;
  peep_word_t peep;
  sig_t h_t;
  int checks = 0, failures = 0;
  int exp_h [N], exp_c [N], t_in [N];
  int n_in = 0, n_out = 0, cyc = 0;

  lstm_epu #(.IW(8)) dut (.*);

  always @(posedge clk) cyc++;

  function automatic int rnd16();
    // mostly inside the table range, sometimes far outside
    if ($urandom_range(0, 7) == 0) return int'(net_t'($urandom));
    return $urandom_range(0, 20000) - 10000;
  endfunction

  // driver
  initial begin
    rst_n = 0; in_valid = 0; in_idx = 0;
    c_prev = 0; pe_i = 0; pe_f = 0; pe_o = 0; pe_c = 0; peep = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (n_in < N) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      if (in_valid) begin
        int h, c;
        c_prev = net_t'(rnd16()); pe_i = net_t'(rnd16()); pe_f = net_t'(rnd16());
        pe_o = net_t'(rnd16()); pe_c = net_t'(rnd16());
        peep = peep_word_t'($urandom);
        in_idx = 8'(n_in);
        epu_ref(int'(c_prev), int'(pe_i), int'(pe_f), int'(pe_o), int'(pe_c),
                int'(peep.wi), int'(peep.wf), int'(peep.wo), h, c);
        exp_h[n_in] = h; exp_c[n_in] = c; t_in[n_in] = cyc;
        n_in++;
      end
    end
    @(negedge clk);
    in_valid = 0;
  end

  // monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 4;
    if (int'(h_t) != exp_h[n_out]) begin
      failures++; $display("FAIL h[%0d] got %0d exp %0d", n_out, h_t, exp_h[n_out]);
    end
    if (int'(c_t) != exp_c[n_out]) begin
      failures++; $display("FAIL c[%0d] got %0d exp %0d", n_out, c_t, exp_c[n_out]);
    end
    if (out_idx != 8'(n_out)) begin
      failures++; $display("FAIL idx got %0d exp %0d", out_idx, 8'(n_out));
    end
    if (cyc - t_in[n_out] != LAT) begin
      failures++; $display("FAIL latency %0d", cyc - t_in[n_out]);
    end
    n_out++;
    if (n_out == N) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
