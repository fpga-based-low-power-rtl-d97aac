// tb_output_tile: loads random output weights and biases for both networks,
// feeds h (answering each request one clock later) and compares the serial
// y outputs with y = b + W h; checks the output count per network, the
// index order and the start-to-first-output time of HID + 4 clocks.
module tb_output_tile;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;
  localparam int HID = 8, N_OUT = 5;
  localparam int WAW = $clog2(2*HID), OW = $clog2(N_OUT);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, net_sel, busy, done, y_valid, w_we, b_we, b_addr;
  logic [OW:0] n_out;
  rd_req_t rd_req;
  sig_t h_in;
  logic [OW-1:0] y_idx;
  net_t y_data;
  logic [WAW-1:0] w_addr;
  logic [N_OUT*W_W-1:0] w_data;
  logic [N_OUT*NET_W-1:0] b_data;

  output_tile #(.HID(HID), .N_OUT(N_OUT)) dut (.*);

  int w [2][HID][N_OUT], b [2][N_OUT], h [HID];
  int checks = 0, failures = 0;

  always @(posedge clk) if (rd_req.valid) h_in <= sig_t'(h[rd_req.idx]);

  task automatic run(input int net, input int no);
    int e, cyc, got;
    foreach (h[k]) h[k] = int'(sig_t'($urandom));
    @(negedge clk);
    start = 1; net_sel = 1'(net); n_out = (OW+1)'(no);
    @(negedge clk);
    start = 0; cyc = 1; got = 0;
    while (!done && cyc < 200) begin
      if (y_valid) begin
        if (got == 0) begin
          checks++;
          if (cyc != HID + 4) begin failures++; $display("FAIL first output at %0d", cyc); end
        end
        e = b[net][got];
        for (int k = 0; k < HID; k++) e = sat16(longint'(e) + h[k] * w[net][k][got]);
        checks += 2;
        if (int'(y_idx) != got) begin failures++; $display("FAIL y_idx"); end
        if (int'(y_data) != e) begin failures++; $display("FAIL y[%0d] got %0d exp %0d", got, y_data, e); end
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (got != no) begin failures++; $display("FAIL %0d outputs, expected %0d", got, no); end
  endtask

  initial begin
    rst_n = 0; start = 0; net_sel = 0; n_out = 0; h_in = 0;
    w_we = 0; b_we = 0; b_addr = 0; w_addr = 0; w_data = 0; b_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2; n++) begin
      for (int k = 0; k < HID; k++) begin
        for (int o = 0; o < N_OUT; o++) begin
          w[n][k][o] = int'(wgt_t'($urandom));
          w_data[o*W_W +: W_W] = W_W'(w[n][k][o]);
        end
        @(negedge clk); w_we = 1; w_addr = WAW'(n*HID + k);
        @(negedge clk); w_we = 0;
      end
      for (int o = 0; o < N_OUT; o++) begin
        b[n][o] = $urandom_range(0, 4000) - 2000;
        b_data[o*NET_W +: NET_W] = NET_W'(b[n][o]);
      end
      @(negedge clk); b_we = 1; b_addr = 1'(n);
      @(negedge clk); b_we = 0;
    end
    run(0, N_OUT); run(1, N_OUT - 1); run(0, N_OUT); run(1, 2);
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
