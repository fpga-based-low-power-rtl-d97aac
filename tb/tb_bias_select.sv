// tb_bias_select: loads random bias vectors for every layer and gate and
// checks that pass 0 selects (b_i, b_f) and pass 1 selects (b_o, b_c) of the
// requested layer.
module tb_bias_select;
  import rnn_pkg::*;
  localparam int HID = 4;
  localparam int NL  = 5;
  localparam int LW  = $clog2(NL);

  logic clk = 0;
  always #5 clk = ~clk;

  logic ld_we, pass;
  logic [1:0] ld_sel;
  logic [LW-1:0] ld_addr, layer;
  logic [HID*NET_W-1:0] ld_data;
  logic [HID-1:0][NET_W-1:0] bias0, bias1;
  logic [HID*NET_W-1:0] model [4][NL];
  int checks = 0, failures = 0;

  bias_select #(.HID(HID), .NL(NL)) dut (.*);

  initial begin
    ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = 0; layer = 0; pass = 0;
    for (int g = 0; g < 4; g++)
      for (int l = 0; l < NL; l++) begin
        @(negedge clk);
        ld_we = 1; ld_sel = 2'(g); ld_addr = LW'(l);
        ld_data = {$urandom, $urandom};
        model[g][l] = ld_data;
      end
    @(negedge clk);
    ld_we = 0;
    for (int n = 0; n < 50; n++) begin
      layer = LW'($urandom_range(0, NL - 1));
      pass  = 1'($urandom);
      #1;
      checks += 2;
      if (bias0 !== model[pass ? 2 : 0][layer]) begin
        failures++; $display("FAIL bias0 layer %0d pass %0d", layer, pass);
      end
      if (bias1 !== model[pass ? 3 : 1][layer]) begin
        failures++; $display("FAIL bias1 layer %0d pass %0d", layer, pass);
      end
      @(negedge clk);
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
