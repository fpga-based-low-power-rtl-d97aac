// tb_epu_controller: checks that element k = 0..HID-1 is issued on
// consecutive clocks with PE-buffer address k, peephole address
// layer*HID + k and a c_{t-1}[k] request, that each element reaches the EPU
// one clock later, and that done follows the HID-th EPU result.
module tb_epu_controller;
  import rnn_pkg::*;
  localparam int HID = 8;
  localparam int NL  = 5;
  localparam int AW  = $clog2(HID);
  localparam int LW  = $clog2(NL);
  localparam int PAW = $clog2(HID * NL);
  localparam int LAT = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, pebuf_re, peep_re, epu_valid, epu_out_valid;
  logic [LW-1:0] layer;
  logic [AW-1:0] pebuf_addr, epu_idx;
  logic [PAW-1:0] peep_addr;
  rd_req_t rd_req;
  logic [LAT-1:0] pipe;
  int checks = 0, failures = 0;

  epu_controller #(.HID(HID), .NL(NL)) dut (.*);

  // stand-in for the EPU pipeline
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pipe <= '0;
    else        pipe <= {pipe[LAT-2:0], epu_valid};
  assign epu_out_valid = pipe[LAT-1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic run(input int l);
    int cyc, k, kv, last_issue;
    bit prev;
    @(negedge clk);
    layer = LW'(l); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; k = 0; kv = 0; prev = 0; last_issue = 0;
    while (!done && cyc < 200) begin
      check(epu_valid == prev, "epu_valid one clock after issue");
      if (epu_valid) begin check(int'(epu_idx) == kv, "epu index"); kv++; end
      prev = rd_req.valid;
      if (rd_req.valid) begin
        check(pebuf_re && peep_re, "read enables");
        check(int'(pebuf_addr) == k, "PE buffer address");
        check(int'(peep_addr) == l * HID + k, "peephole address");
        check(rd_req.kind == RD_C && int'(rd_req.idx) == k, "c request");
        k++;
        last_issue = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    check(k == HID && kv == HID, "element count");
    check(cyc == HID + LAT + 3, $sformatf("EPU phase time %0d", cyc));
    @(negedge clk);
    check(!busy, "idle");
  endtask

  initial begin
    rst_n = 0; start = 0; layer = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0); run(3); run(4);
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
