// sdp_ram: simple dual-port block RAM with a registered read port.
//
// Used for the Weight0 and Weight1 BRAMs (4,402 x 1,536 bit), the peephole
// weight BRAM (1,280 x 24 bit) and the output tile's weight memory.  One write
// port loads parameters from the host; at every clock edge where re is high
// the read port loads mem[raddr] into rdata, which then holds until the next
// read (one-cycle latency, like an FPGA block RAM without its extra output
// register).  Contents are not reset.
module sdp_ram #(
  parameter int DEPTH = 4402,
  parameter int WIDTH = 1536,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
