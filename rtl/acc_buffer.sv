// acc_buffer -- accumulation buffer of one readout channel.
//
// Stores the accumulated I/Q results of its channel in arrival order, one
// 64-bit entry {I[31:0], Q[31:0]} per readout pulse. `count` is the number of
// entries held and `full` is raised when all DEPTH entries are used; results
// that arrive while full are dropped. The sequencer repeats the sequence until
// a buffer is full, and the host clears it (clear) after reading, as in the
// published design. The depth is this design's choice: 2^17 entries hold
// about 100 readouts per repetition for 1024 repetitions, the largest run the
// published experiments describe (about 100 circuits loaded at a time).
//
// Timing: a result written in clock c is counted from clock c+1. The host reads
// on hclk with one clock of latency.
module acc_buffer #(
  parameter int DEPTH = 131072,
  parameter int ACC_W = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               clear,
  input  logic               wr,
  input  logic [ACC_W-1:0]   wi,
  input  logic [ACC_W-1:0]   wq,
  output logic [AW:0]        count,
  output logic               full,
  input  logic               hclk,
  input  logic [AW-1:0]      raddr,
  output logic [2*ACC_W-1:0] rdata
);
  logic [2*ACC_W-1:0] mem [DEPTH];

  assign full = (count == (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr && !full) mem[count[AW-1:0]] <= {wi, wq};
    if (rst || clear)       count <= '0;
    else if (wr && !full)   count <= count + 1'b1;
  end

  always_ff @(posedge hclk) rdata <= mem[raddr];

  a_count_bound: assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));
endmodule
