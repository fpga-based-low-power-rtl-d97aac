// tb_rnn_full: end-to-end test of the RNN engine at the full size of the paper (3 x 256 acoustic
// model with 123 inputs and 31 outputs, 2 x 256 character LM with 30
// inputs and outputs, 128 contexts).
//
// The testbench acts as the host CPU of the speech recognizer.  It loads
// random weights, biases, peephole weights, output-layer parameters and
// initial contexts through the load bus, then issues a sequence of commands:
// acoustic-model frames (random 123-style feature vectors on the x port) and
// character-LM steps (one-hot character on the x port) that update a beam
// context in place (src = dst) or branch a new hypothesis from another
// context (src != dst), and finally a context reset through the load bus.
// Every y output is compared with the reference model, and the command
// latency with the schedule:  sum over layers of 2(n_in + HID + 3) + HID + 11,
// plus HID + 6 + outputs for the output layer.  Each mechanism of the design
// is counted and must occur at least once.
module tb_rnn_full;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;

  localparam int HID = 256, AM_IN = 123, LM_IN = 30, AML = 3, LML = 2, NCTX = 128, AMO = 31, LMO = 30;
  localparam int NL = AML + LML;
  localparam int W_DEPTH = 2*(AM_IN+HID) + 2*(AML-1)*2*HID + 2*(LM_IN+HID) + 2*(LML-1)*2*HID;
  localparam int CTX_DEPTH = HID * (AML + NCTX*LML);
  localparam int N_OUT = (AMO > LMO) ? AMO : LMO;
  localparam int CW = $clog2(NCTX), OW = $clog2(N_OUT);
  localparam int LD_W = ((HID > N_OUT) ? HID : N_OUT) * NET_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, ld_we, cmd_valid, cmd_net, busy, cmd_done, x_rd_en, y_valid;
  ld_target_e ld_target;
  logic [LDA_W-1:0] ld_addr;
  logic [LD_W-1:0] ld_data;
  logic [CW-1:0] cmd_src, cmd_dst;
  logic [IDX_W-1:0] x_rd_addr;
  sig_t x_t;
  logic [OW-1:0] y_idx;
  net_t y_data;

  rnn_accel_top dut (.*);

  rnn_model m;
  int xv[];
  int checks = 0, failures = 0;
  int n_am = 0, n_lm = 0, n_inplace = 0, n_branch = 0, n_ctx_load = 0, n_x_reads = 0;
  int n_state_carry = 0;

  // host side of the x port: answer one clock after the request
  always @(posedge clk) if (x_rd_en) begin
    x_t <= sig_t'(xv[x_rd_addr]);
    n_x_reads++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic load(input ld_target_e t, input int a, input logic [LD_W-1:0] d);
    ld_we = 1; ld_target = t; ld_addr = LDA_W'(a); ld_data = d;
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic load_params();
    logic [LD_W-1:0] d;
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
        d = '0;
        for (int k = 0; k < HID; k++) d[k*NET_W +: NET_W] = NET_W'(m.bias[(g*NL+l)*HID+k]);
        load(ld_target_e'(int'(LD_BI) + g), l, d);
      end
    for (int e = 0; e < NL*HID; e++) begin
      d = '0;
      d[23:16] = 8'(m.peep[e*3]); d[15:8] = 8'(m.peep[e*3+1]); d[7:0] = 8'(m.peep[e*3+2]);
      load(LD_PEEP, e, d);
    end
    for (int r = 0; r < 2*HID; r++) begin
      d = '0;
      for (int o = 0; o < N_OUT; o++) d[o*W_W +: W_W] = W_W'(m.ow[r*N_OUT+o]);
      load(LD_OUT_W, r, d);
    end
    for (int n = 0; n < 2; n++) begin
      d = '0;
      for (int o = 0; o < N_OUT; o++) d[o*NET_W +: NET_W] = NET_W'(m.ob[n*N_OUT+o]);
      load(LD_OUT_B, n, d);
    end
  endtask

  task automatic load_ctx(input int a, input int c, input int h);
    logic [LD_W-1:0] d;
    d = '0;
    d[23:0] = {16'(c), 8'(h)};
    m.cc[a] = c; m.ch[a] = h;
    load(LD_CTX, a, d);
  endtask

  longint busy_clocks = 0;       // clocks spent in commands so far

  task automatic command(input bit net, input int src, input int dst);
    int y[], got, cyc, exp_cyc, g0, nlay, n_before;
    int yv[];
    g0 = net ? AML : 0; nlay = net ? LML : AML;
    if (!net) begin
      xv = new[AM_IN];
      foreach (xv[j]) xv[j] = $urandom_range(0, 127) - 64;
    end else begin
      xv = new[LM_IN];
      foreach (xv[j]) xv[j] = 0;
      xv[$urandom_range(0, LM_IN - 1)] = 64;     // one-hot character, 1.0 in Q1.6
    end
    n_before = n_x_reads;
    m.step(net, src, dst, xv, y);
    yv = new[y.size()];
    cmd_valid = 1; cmd_net = net; cmd_src = CW'(src); cmd_dst = CW'(dst);
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1; got = 0;
    while (!cmd_done && cyc < 100000) begin
      if (y_valid) begin
        check(int'(y_idx) == got && got < y.size(), "y index");
        if (got < y.size()) yv[got] = int'(y_data);
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    check(got == y.size(), $sformatf("output count %0d", got));
    for (int o = 0; o < y.size(); o++) begin
      check(yv[o] == y[o], $sformatf("net %0d y[%0d] got %0d exp %0d", net, o, yv[o], y[o]));
    end
    exp_cyc = HID + 6 + y.size();
    for (int l = 0; l < nlay; l++) exp_cyc += 2 * (m.n_in(g0 + l) + HID + 3) + HID + 11;
    check(cyc == exp_cyc, $sformatf("command latency %0d, schedule %0d", cyc, exp_cyc));
    check(n_x_reads - n_before == 2 * xv.size(), "x port reads");
    $display("command net=%0d src=%0d dst=%0d: %0d clocks", net, src, dst, cyc);
    busy_clocks += cyc;
    if (!net) n_am++;
    else begin
      n_lm++;
      if (src == dst) n_inplace++; else n_branch++;
    end
  endtask

  initial begin
    rst_n = 0; ld_we = 0; ld_target = LD_W0; ld_addr = 0; ld_data = 0;
    cmd_valid = 0; cmd_net = 0; cmd_src = 0; cmd_dst = 0; x_t = 0;
    xv = new[1];
    m = new(HID, AM_IN, LM_IN, AML, LML, NCTX, AMO, LMO);
    foreach (m.w0[i]) m.w0[i] = $urandom_range(0, 31) - 16;
    foreach (m.w1[i]) m.w1[i] = $urandom_range(0, 31) - 16;
    foreach (m.bias[i]) m.bias[i] = $urandom_range(0, 2047) - 1024;
    m.bias[0] = 32767;                 // drive two accumulators into saturation
    m.bias[1] = -32768;
    foreach (m.peep[i]) m.peep[i] = $urandom_range(0, 63) - 32;
    foreach (m.ow[i]) m.ow[i] = $urandom_range(0, 63) - 32;
    foreach (m.ob[i]) m.ob[i] = $urandom_range(0, 2047) - 1024;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_params();
    // all contexts start from zero state, as at the start of an utterance
    for (int a = 0; a < CTX_DEPTH; a++) load_ctx(a, 0, 0);
    command(0, 0, 0);
    command(0, 0, 0);          // second frame: uses the state of the first
    n_state_carry++;
    command(1, 5, 5);
    command(1, 5, 127);        // new hypothesis branches off context 5
    for (int a = 0; a < AML*HID; a++) load_ctx(a, 0, 0);
    n_ctx_load++;
    command(0, 0, 0);
    // mechanisms
    check(n_am > 0, "acoustic-model step");
    check(n_lm > 0, "LM step");
    check(n_inplace > 0, "LM context updated in place");
    check(n_branch > 0, "LM context branched to a new slot");
    check(n_state_carry > 0, "recurrent state carried between frames");
    check(n_ctx_load > 0, "context reset through the load bus");
    check(m.sat_events > 0, "accumulator saturation");
    $display("mechanisms: am=%0d lm=%0d inplace=%0d branch=%0d carry=%0d ctx_load=%0d saturations=%0d",
             n_am, n_lm, n_inplace, n_branch, n_state_carry, n_ctx_load, m.sat_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
