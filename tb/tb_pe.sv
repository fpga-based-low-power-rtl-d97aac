// tb_pe: self-checking test of one processing element.
// Loads a bias, accumulates random products with random enable gaps and
// compares net against an integer model, including runs that drive the
// 16-bit accumulator into positive and negative saturation.
module tb_pe;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rstnet, en;
  sig_t din;
  wgt_t w;
  net_t bias, dout;
  int checks = 0, failures = 0;
  int model, n_sat;

  pe dut (.clk, .rstnet, .en, .din, .w, .bias, .dout);

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    rstnet = 0; en = 0; din = 0; w = 0; bias = 0;
    n_sat = 0;
    for (int run = 0; run < 40; run++) begin
      @(negedge clk);
      bias = net_t'($urandom);
      rstnet = 1; en = $urandom_range(0, 1);
      model = int'(bias);
      @(negedge clk);
      rstnet = 0;
      check(int'(dout), model, "bias load");
      for (int i = 0; i < 200; i++) begin
        en  = ($urandom_range(0, 3) != 0);
        // large operands in half the runs to reach saturation
        din = (run % 2) ? sig_t'(8'sd127 - 8'($urandom_range(0, 3))) : sig_t'($urandom);
        w   = (run % 4 == 1) ? wgt_t'(6'sh1f) : (run % 4 == 3) ? wgt_t'(6'sh20) : wgt_t'($urandom);
        @(negedge clk);
        if (en) begin
          if (model + int'(din) * int'(w) > 32767 || model + int'(din) * int'(w) < -32768) n_sat++;
          model = sat16(longint'(model) + int'(din) * int'(w));
        end
        check(int'(dout), model, "accumulate");
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
