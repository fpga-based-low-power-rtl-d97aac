// tb_pe_controller: checks the two-pass schedule of one layer: weight rows
// wbase .. wbase + 2(n_in+HID) - 1 in order, x requests then h requests in
// each pass, one bias preload per pass with the right bias select, the
// accumulate strobe one clock behind each request, Sel_IN only for x
// elements of an external-input layer, the PE-buffer stores and the
// start-to-done time of 2(n_in + HID + 3) + 1 clocks.
module tb_pe_controller;
  import rnn_pkg::*;
  localparam int HID = 4;
  localparam int W_DEPTH = 64;
  localparam int WAW = $clog2(W_DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, ext_x, busy, done, w_re, pass, rstnet, en, sel_x, buf_wr_if, buf_wr_oc;
  logic [IDX_W-1:0] n_in;
  logic [WAW-1:0] wbase, w_addr;
  rd_req_t rd_req;
  int checks = 0, failures = 0;

  pe_controller #(.HID(HID), .W_DEPTH(W_DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic run_layer(input int n, input int base, input bit ext);
    int cyc, nreq, n_rst, n_en, n_sel, n_if, n_oc, prev_req_x;
    bit  prev_req;
    @(negedge clk);
    n_in = IDX_W'(n); wbase = WAW'(base); ext_x = ext; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; nreq = 0; n_rst = 0; n_en = 0; n_sel = 0; n_if = 0; n_oc = 0;
    prev_req = 0; prev_req_x = 0;
    while (!done && cyc < 1000) begin
      // data-phase strobes follow the previous cycle's request
      check(en == prev_req, "en aligned with request");
      check(sel_x == (prev_req && prev_req_x && ext), "sel_x");
      if (rstnet) begin
        check(pass == (n_rst == 1), "bias select during preload");
        check(nreq == n_rst * (n + HID), "preload before pass");
        n_rst++;
      end
      if (en) n_en++;
      if (sel_x) n_sel++;
      if (buf_wr_if) begin n_if++; check(!pass && nreq == n + HID, "store PE_i/PE_f"); end
      if (buf_wr_oc) begin n_oc++; check(pass && nreq == 2 * (n + HID), "store PE_o/PE_c"); end
      prev_req = rd_req.valid;
      prev_req_x = 0;
      if (rd_req.valid) begin
        int j;
        j = nreq % (n + HID);
        check(w_re && int'(w_addr) == base + nreq, "weight row");
        check(pass == (nreq >= n + HID), "pass");
        if (j < n) check(rd_req.kind == RD_X && int'(rd_req.idx) == j, "x request");
        else       check(rd_req.kind == RD_H && int'(rd_req.idx) == j - n, "h request");
        prev_req_x = (j < n);
        nreq++;
      end
      check(busy, "busy");
      @(negedge clk);
      cyc++;
    end
    check(cyc == 2 * (n + HID + 3) + 1, $sformatf("layer time %0d", cyc));
    check(nreq == 2 * (n + HID), "request count");
    check(n_rst == 2 && n_if == 1 && n_oc == 1, "preloads and stores");
    check(n_sel == (ext ? 2 * n : 0), "Sel_IN count");
    @(negedge clk);
    check(!busy && !done, "idle after done");
  endtask

  initial begin
    rst_n = 0; start = 0; n_in = 0; wbase = 0; ext_x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_layer(3, 10, 1);
    run_layer(4, 0, 0);
    run_layer(1, 30, 1);
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
