// tb_context_memory: fills the memory with random (c, h) words and reads
// them back with the one-clock latency, with writes to other words in the
// same clocks (the EPU write-back pattern).
module tb_context_memory;
  import rnn_pkg::*;
  localparam int DEPTH = 200;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  ctx_t ctx_in, ctx_out;
  ctx_t model [DEPTH];
  int checks = 0, failures = 0;

  context_memory #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; ctx_in = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); ctx_in = ctx_t'($urandom);
      model[i] = ctx_in;
    end
    for (int n = 0; n < 400; n++) begin
      int a, b;
      @(negedge clk);
      a = $urandom_range(0, DEPTH - 1);
      b = (a + 1 + $urandom_range(0, DEPTH - 2)) % DEPTH;
      rd_en = 1; rd_addr = AW'(a);
      wr_en = $urandom_range(0, 1); wr_addr = AW'(b); ctx_in = ctx_t'($urandom);
      @(posedge clk);
      #1;
      if (wr_en) model[b] = ctx_in;
      checks++;
      if (ctx_out !== model[a]) begin
        failures++; $display("FAIL word %0d got %h exp %h", a, ctx_out, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
