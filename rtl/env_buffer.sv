// env_buffer -- envelope buffer of one processing element.
//
// DEPTH complex points of 32 bits; the upper 16 bits are the real (I) part and
// the lower 16 bits the imaginary (Q) part of the pulse envelope, as in the
// published layout (1k x 32). Written by the host on hclk, read by the element
// on the DSP clock with one clock of latency.
module env_buffer #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             hclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             clk,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge hclk) if (we) mem[waddr] <= wdata;

  always_ff @(posedge clk) rdata <= mem[raddr];
endmodule
