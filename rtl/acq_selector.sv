// acq_selector -- source selector of the acquisition buffers.
//
// Picks for each of the L acquisition buffers one raw stream out of NSRC:
// sources 0 and 1 are the two ADCs (I, Q), then the DLO I and Q of each of the
// K down-conversion elements, then the N DACs, in the order of the published
// block diagram. A selection past the last source gives zeros.
//
// Timing: one clock from src to out.
module acq_selector
  import qubic_pkg::*;
#(
  parameter int NSRC = 18,
  parameter int L    = 2
) (
  input  logic    clk,
  input  sample_t src [NSRC][NS],
  input  logic [7:0] sel [L],
  output sample_t out [L][NS]
);
  always_ff @(posedge clk)
    for (int l = 0; l < L; l++)
      for (int k = 0; k < NS; k++)
        out[l][k] <= (int'(sel[l]) < NSRC) ? src[int'(sel[l]) % NSRC][k] : '0;
endmodule
