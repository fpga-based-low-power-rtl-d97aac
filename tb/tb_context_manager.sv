// tb_context_manager: drives commands into the context manager with
// stand-ins for the two tiles and checks the layer jobs it starts (global
// layer, input length, first weight row, input source) and the translation
// of every kind of operand request and of the result write into
// context-memory or x-port addresses, for the acoustic model and for LM
// steps with src = dst and src != dst.
module tb_context_manager;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;
  localparam int HID = 8, AM_IN = 5, LM_IN = 4, AML = 3, LML = 2, NCTX = 4, AMO = 5, LMO = 4;
  localparam int NL = AML + LML;
  localparam int W_DEPTH = 2*(AM_IN+HID) + 2*(AML-1)*2*HID + 2*(LM_IN+HID) + 2*(LML-1)*2*HID;
  localparam int CTX_DEPTH = HID * (AML + NCTX*LML);
  localparam int WAW = $clog2(W_DEPTH), LW = $clog2(NL), CW = $clog2(NCTX);
  localparam int CAW = $clog2(CTX_DEPTH), AW = $clog2(HID), OW = $clog2(AMO);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, cmd_valid, cmd_net, busy, cmd_done;
  logic [CW-1:0] cmd_src, cmd_dst;
  logic tile_start, tile_ext_x, tile_done, tile_out_valid;
  logic [LW-1:0] tile_layer;
  logic [IDX_W-1:0] tile_n_in;
  logic [WAW-1:0] tile_wbase;
  rd_req_t tile_rd_req, out_rd_req;
  logic [AW-1:0] tile_out_idx;
  sig_t tile_h_t;
  net_t tile_c_t;
  logic out_start, out_net, out_done;
  logic [OW:0] out_n_out;
  logic ctx_rd_en, ctx_wr_en, x_rd_en;
  logic [CAW-1:0] ctx_rd_addr, ctx_wr_addr;
  ctx_t ctx_wr_data;
  logic [IDX_W-1:0] x_rd_addr;

  context_manager #(.HID(HID), .AM_IN(AM_IN), .LM_IN(LM_IN), .AM_LAYERS(AML),
                    .LM_LAYERS(LML), .N_CTX(NCTX), .AM_OUT(AMO), .LM_OUT(LMO)) dut (.*);

  rnn_model m;   // used only for its address and layer tables
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic command(input bit net, input int src, input int dst);
    int nlay, g, e;
    nlay = net ? LML : AML;
    @(negedge clk);
    cmd_valid = 1; cmd_net = net; cmd_src = CW'(src); cmd_dst = CW'(dst);
    @(negedge clk);
    cmd_valid = 0;
    for (int l = 0; l < nlay; l++) begin
      while (!tile_start) @(negedge clk);
      g = (net ? AML : 0) + l;
      check(int'(tile_layer) == g, "tile layer");
      check(int'(tile_n_in) == m.n_in(g), "tile n_in");
      check(int'(tile_wbase) == m.wbase(g), "tile wbase");
      check(tile_ext_x == (l == 0), "tile ext_x");
      check(busy, "busy");
      @(negedge clk);
      // one request of each kind
      e = $urandom_range(0, HID - 1);
      tile_rd_req = '{valid: 1'b1, kind: RD_X, idx: IDX_W'(e)};
      #1;
      if (l == 0) check(x_rd_en && !ctx_rd_en && int'(x_rd_addr) == e, "x from port");
      else check(ctx_rd_en && !x_rd_en && int'(ctx_rd_addr) == m.caddr(net, dst, l - 1, e), "x from lower layer");
      @(negedge clk);
      tile_rd_req = '{valid: 1'b1, kind: RD_H, idx: IDX_W'(e)};
      #1 check(ctx_rd_en && int'(ctx_rd_addr) == m.caddr(net, src, l, e), "h_{t-1} address");
      @(negedge clk);
      tile_rd_req = '{valid: 1'b1, kind: RD_C, idx: IDX_W'(e)};
      #1 check(ctx_rd_en && int'(ctx_rd_addr) == m.caddr(net, src, l, e), "c_{t-1} address");
      @(negedge clk);
      tile_rd_req = '0;
      tile_out_valid = 1; tile_out_idx = AW'(e); tile_h_t = sig_t'($urandom); tile_c_t = net_t'($urandom);
      #1 check(ctx_wr_en && int'(ctx_wr_addr) == m.caddr(net, dst, l, e) &&
               ctx_wr_data.h == tile_h_t && ctx_wr_data.c == tile_c_t, "result write");
      @(negedge clk);
      tile_out_valid = 0;
      #1 check(!ctx_wr_en && !ctx_rd_en && !x_rd_en, "quiet");
      tile_done = 1;
      @(negedge clk);
      tile_done = 0;
    end
    while (!out_start) @(negedge clk);
    check(out_net == net && int'(out_n_out) == (net ? LMO : AMO), "output tile job");
    @(negedge clk);
    e = $urandom_range(0, HID - 1);
    out_rd_req = '{valid: 1'b1, kind: RD_H, idx: IDX_W'(e)};
    #1 check(ctx_rd_en && int'(ctx_rd_addr) == m.caddr(net, dst, nlay - 1, e), "output tile h address");
    @(negedge clk);
    out_rd_req = '0;
    out_done = 1;
    @(negedge clk);
    out_done = 0;
    check(cmd_done, "cmd_done");
    @(negedge clk);
    check(!busy && !cmd_done, "idle");
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd_net = 0; cmd_src = 0; cmd_dst = 0;
    tile_done = 0; tile_rd_req = '0; tile_out_valid = 0; tile_out_idx = 0;
    tile_h_t = 0; tile_c_t = 0; out_done = 0; out_rd_req = '0;
    m = new(HID, AM_IN, LM_IN, AML, LML, NCTX, AMO, LMO);
    repeat (2) @(negedge clk);
    rst_n = 1;
    command(0, 0, 0);
    command(1, 2, 2);
    command(1, 1, 3);
    command(1, 3, 0);
    command(0, 0, 0);
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
