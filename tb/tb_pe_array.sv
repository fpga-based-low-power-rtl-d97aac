// tb_pe_array: outer-product matrix-vector test of the two PE arrays.
// For random weight matrices W0, W1 (HID x N), biases and input vector x,
// one element of x per clock must leave PE_OUT0 = b0 + W0 x and
// PE_OUT1 = b1 + W1 x after N clocks.
module tb_pe_array;
  import rnn_pkg::*;
  import tb_rnn_ref_pkg::*;

  localparam int HID = 16;
  localparam int N   = 37;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rstnet, en;
  sig_t pe_in;
  logic [HID-1:0][W_W-1:0]   weight0, weight1;
  logic [HID-1:0][NET_W-1:0] bias0, bias1, pe_out0, pe_out1;
  int checks = 0, failures = 0;
  int w0 [N][HID], w1 [N][HID], x [N], e0 [HID], e1 [HID];

  pe_array #(.HID(HID)) dut (.*);

  initial begin
    rstnet = 0; en = 0; pe_in = 0; weight0 = '0; weight1 = '0;
    for (int t = 0; t < 4; t++) begin
      for (int k = 0; k < HID; k++) begin
        bias0[k] = NET_W'($urandom_range(0, 4000) - 2000);
        bias1[k] = NET_W'($urandom_range(0, 4000) - 2000);
        e0[k] = int'(net_t'(bias0[k]));
        e1[k] = int'(net_t'(bias1[k]));
      end
      for (int j = 0; j < N; j++) begin
        x[j] = int'(sig_t'($urandom));
        for (int k = 0; k < HID; k++) begin
          w0[j][k] = int'(wgt_t'($urandom));
          w1[j][k] = int'(wgt_t'($urandom));
          e0[k] = sat16(longint'(e0[k]) + x[j] * w0[j][k]);
          e1[k] = sat16(longint'(e1[k]) + x[j] * w1[j][k]);
        end
      end
      @(negedge clk);
      rstnet = 1;
      @(negedge clk);
      rstnet = 0;
      for (int j = 0; j < N; j++) begin
        en = 1;
        pe_in = sig_t'(x[j]);
        for (int k = 0; k < HID; k++) begin
          weight0[k] = W_W'(w0[j][k]);
          weight1[k] = W_W'(w1[j][k]);
        end
        @(negedge clk);
        en = 0;
        if ($urandom_range(0, 3) == 0) begin   // idle gap: sums must hold
          pe_in = sig_t'($urandom);
          @(negedge clk);
        end
      end
      for (int k = 0; k < HID; k++) begin
        checks += 2;
        if (int'(net_t'(pe_out0[k])) != e0[k]) begin
          failures++; $display("FAIL PE0[%0d] got %0d exp %0d", k, net_t'(pe_out0[k]), e0[k]);
        end
        if (int'(net_t'(pe_out1[k])) != e1[k]) begin
          failures++; $display("FAIL PE1[%0d] got %0d exp %0d", k, net_t'(pe_out1[k]), e1[k]);
        end
      end
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
