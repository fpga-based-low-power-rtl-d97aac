// tb_sdp_ram: write/read test of the block RAM, including the one-clock read
// latency, read-enable hold and a write and read to the same row in one clock
// (the read returns the old word).
module tb_sdp_ram;
  localparam int DEPTH = 100;
  localparam int WIDTH = 40;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata, hold;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  task automatic check(input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, 8'($urandom)};
      model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      raddr = AW'(a); re = 1;
      // concurrent write to the same row
      we = ($urandom_range(0, 3) == 0); waddr = AW'(a); wdata = {$urandom, 8'($urandom)};
      @(negedge clk);
      check(rdata, model[a], "read after one clock");
      if (we) model[a] = wdata;
      we = 0;
      hold = rdata;
      re = 0; raddr = AW'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      check(rdata, hold, "hold while re low");
    end
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
