// tb_lstm_tile: runs complete layers on the LSTM tile and compares the
// written (c_t, h_t) of every element with the reference model.
//
// The testbench plays the context manager: it starts the tile once per layer
// (three acoustic-model layers, then two LM layers reading slot 0 and
// writing slot 1), answers each operand request one clock later from its own
// copy of the context memory or the x vector, and stores the tile's results.
// After each network step its context copy must equal the model's.  The
// start-to-done time of each layer is checked against
// 2*(n_in + HID + 3) + HID + 10 clocks.
module tb_lstm_tile;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;

  localparam int HID = 8, AM_IN = 5, LM_IN = 4, AML = 3, LML = 2, NCTX = 2;
  localparam int NL = AML + LML;
  localparam int W_DEPTH = 2*(AM_IN+HID) + 2*(AML-1)*2*HID + 2*(LM_IN+HID) + 2*(LML-1)*2*HID;
  localparam int WAW = $clog2(W_DEPTH), LW = $clog2(NL), AW = $clog2(HID);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, ext_x, busy, done, out_valid, ld_we;
  logic [LW-1:0] layer;
  logic [IDX_W-1:0] n_in;
  logic [WAW-1:0] wbase;
  rd_req_t rd_req;
  sig_t x_t, h_prev, h_t;
  net_t c_prev, c_t;
  logic [AW-1:0] out_idx;
  ld_target_e ld_target;
  logic [LDA_W-1:0] ld_addr;
  logic [HID*NET_W-1:0] ld_data;

  lstm_tile #(.HID(HID), .NL(NL), .W_DEPTH(W_DEPTH)) dut (.*);

  rnn_model m;
  int cc[], ch[], xv[];
  int checks = 0, failures = 0;
  bit cur_net;
  int cur_l, cur_src, cur_dst;

  task automatic load(input ld_target_e t, input int a, input logic [HID*NET_W-1:0] d);
    @(negedge clk);
    ld_we = 1; ld_target = t; ld_addr = LDA_W'(a); ld_data = d;
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic load_all();
    logic [HID*NET_W-1:0] d;
    for (int r = 0; r < W_DEPTH; r++) begin
      d = '0;
      for (int k = 0; k < HID; k++) d[k*W_W +: W_W] = W_W'(m.w0[r*HID+k]);
      load(LD_W0, r, d);
      d = '0;
      for (int k = 0; k < HID; k++) d[k*W_W +: W_W] = W_W'(m.w1[r*HID+k]);
      load(LD_W1, r, d);
    end
    for (int g = 0; g < 4; g++)
      for (int l = 0; l < NL; l++) begin
        for (int k = 0; k < HID; k++) d[k*NET_W +: NET_W] = NET_W'(m.bias[(g*NL+l)*HID+k]);
        load(ld_target_e'(int'(LD_BI) + g), l, d);
      end
    for (int e = 0; e < NL*HID; e++) begin
      d = '0;
      d[23:16] = 8'(m.peep[e*3]); d[15:8] = 8'(m.peep[e*3+1]); d[7:0] = 8'(m.peep[e*3+2]);
      load(LD_PEEP, e, d);
    end
  endtask

  // operand server: answer one clock after the request
  always @(posedge clk) begin
    if (rd_req.valid) begin
      int i, a;
      i = int'(rd_req.idx);
      unique case (rd_req.kind)
        RD_X: if (cur_l == 0) x_t <= sig_t'(xv[i]);
              else h_prev <= sig_t'(ch[m.caddr(cur_net, cur_dst, cur_l - 1, i)]);
        RD_H: h_prev <= sig_t'(ch[m.caddr(cur_net, cur_src, cur_l, i)]);
        default: c_prev <= net_t'(cc[m.caddr(cur_net, cur_src, cur_l, i)]);
      endcase
    end
    if (out_valid) begin
      cc[m.caddr(cur_net, cur_dst, cur_l, int'(out_idx))] = int'(c_t);
      ch[m.caddr(cur_net, cur_dst, cur_l, int'(out_idx))] = int'(h_t);
    end
  end

  task automatic run_net(input bit net, input int src, input int dst);
    int y[], g0, nlay, cyc;
    g0 = net ? AML : 0; nlay = net ? LML : AML;
    xv = new[net ? LM_IN : AM_IN];
    foreach (xv[j]) xv[j] = $urandom_range(0, 127) - 64;
    cur_net = net; cur_src = src; cur_dst = dst;
    for (int l = 0; l < nlay; l++) begin
      @(negedge clk);
      cur_l = l;
      layer = LW'(g0 + l); n_in = IDX_W'(m.n_in(g0 + l)); wbase = WAW'(m.wbase(g0 + l));
      ext_x = (l == 0); start = 1;
      @(negedge clk);
      start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2 * (m.n_in(g0 + l) + HID + 3) + HID + 10) begin
        failures++; $display("FAIL layer time %0d", cyc);
      end
    end
    m.step(net, src, dst, xv, y);
    for (int a = 0; a < m.cdepth; a++) begin
      checks++;
      if (cc[a] != m.cc[a] || ch[a] != m.ch[a]) begin
        failures++;
        if (failures < 10) $display("FAIL ctx[%0d] got (%0d,%0d) exp (%0d,%0d)", a, cc[a], ch[a], m.cc[a], m.ch[a]);
      end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; ext_x = 0; layer = 0; n_in = 0; wbase = 0;
    ld_we = 0; ld_target = LD_W0; ld_addr = 0; ld_data = 0;
    x_t = 0; h_prev = 0; c_prev = 0; cur_l = 0; cur_net = 0; cur_src = 0; cur_dst = 0;
    m = new(HID, AM_IN, LM_IN, AML, LML, NCTX, 4, 4);
    foreach (m.w0[i]) m.w0[i] = $urandom_range(0, 31) - 16;
    foreach (m.w1[i]) m.w1[i] = $urandom_range(0, 31) - 16;
    foreach (m.bias[i]) m.bias[i] = $urandom_range(0, 2047) - 1024;
    foreach (m.peep[i]) m.peep[i] = $urandom_range(0, 63) - 32;
    cc = new[m.cdepth]; ch = new[m.cdepth];
    foreach (cc[i]) begin
      m.cc[i] = $urandom_range(0, 4095) - 2048; m.ch[i] = $urandom_range(0, 127) - 64;
      cc[i] = m.cc[i]; ch[i] = m.ch[i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_all();
    run_net(0, 0, 0);
    run_net(0, 0, 0);
    run_net(1, 0, 1);
    run_net(1, 1, 1);
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
