// cmd_buffer -- the command buffer: DEPTH words of 128 bits holding the pulse
// commands of one sequence in issue order.
//
// A simple dual-port RAM with two clocks. The host side writes whole 128-bit
// commands on hclk; the sequencer reads on the DSP clock with one clock of
// latency (rdata is registered and holds its value while re is low). Depth and
// width (64k x 128) are the published buffer size; the two-clock arrangement
// is how this design lets the host interface own the clock-domain crossing.
module cmd_buffer #(
  parameter int DEPTH = 65536,
  parameter int WIDTH = 128,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             hclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge hclk) if (we) mem[waddr] <= wdata;

  always_ff @(posedge clk) if (re) rdata <= mem[raddr];
endmodule
