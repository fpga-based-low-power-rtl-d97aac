// tb_pe_buffer: stores two PE-array result pairs (pass 0 -> PE_i/PE_f,
// pass 1 -> PE_o/PE_c) and reads every element back with one clock latency.
module tb_pe_buffer;
  import rnn_pkg::*;
  localparam int HID = 8;
  localparam int AW  = $clog2(HID);

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_if, wr_oc, re;
  logic [AW-1:0] addr;
  logic [HID-1:0][NET_W-1:0] pe_out0, pe_out1, m_i, m_f, m_o, m_c;
  net_t pe_i, pe_f, pe_o, pe_c;
  int checks = 0, failures = 0;

  pe_buffer #(.HID(HID)) dut (.*);

  task automatic check(input net_t got, input logic [NET_W-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++; $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    wr_if = 0; wr_oc = 0; re = 0; addr = 0;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      pe_out0 = {$urandom, $urandom, $urandom, $urandom};
      pe_out1 = {$urandom, $urandom, $urandom, $urandom};
      m_i = pe_out0; m_f = pe_out1;
      wr_if = 1;
      @(negedge clk);
      wr_if = 0;
      pe_out0 = {$urandom, $urandom, $urandom, $urandom};
      pe_out1 = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);          // no write strobe: contents must not change
      m_o = pe_out0; m_c = pe_out1;
      wr_oc = 1;
      @(negedge clk);
      wr_oc = 0;
      pe_out0 = '0; pe_out1 = '0;
      for (int k = HID - 1; k >= 0; k--) begin
        re = 1; addr = AW'(k);
        @(negedge clk);
        check(pe_i, m_i[k], "PE_i"); check(pe_f, m_f[k], "PE_f");
        check(pe_o, m_o[k], "PE_o"); check(pe_c, m_c[k], "PE_c");
      end
      re = 0;
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
