// dac_switch -- M-to-N switch from the up-conversion elements to the DACs.
//
// Each element's IF output is routed to the DAC pair named by its pulse
// destination: I to DAC 2*dest, Q to DAC 2*dest+1. Elements that target the
// same pair in the same clock are added sample by sample; the sum saturates
// to 16 bits. An element that is not playing a pulse contributes nothing.
// Routing by destination and adding of shared outputs follow the published
// design; saturation and the single output register are this design's choice.
//
// Timing: one clock from in_* to dac.
module dac_switch
  import qubic_pkg::*;
#(
  parameter int M     = 4,
  parameter int NDEST = 4
) (
  input  logic              clk,
  input  sample_t           in_i [M][NS],
  input  sample_t           in_q [M][NS],
  input  logic [M-1:0]      in_active,
  input  logic [DEST_W-1:0] in_dest [M],
  output sample_t           dac [2*NDEST][NS]
);
  always_ff @(posedge clk) begin
    for (int d = 0; d < NDEST; d++)
      for (int k = 0; k < NS; k++) begin
        logic signed [39:0] si, sq;
        si = '0;
        sq = '0;
        for (int m = 0; m < M; m++)
          if (in_active[m] && (int'(in_dest[m]) == d)) begin
            si += 40'(in_i[m][k]);
            sq += 40'(in_q[m][k]);
          end
        dac[2*d][k]   <= sat16(si);
        dac[2*d+1][k] <= sat16(sq);
      end
  end
endmodule
