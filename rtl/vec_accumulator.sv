// vec_accumulator -- vector (complex) accumulator of one readout channel.
//
// Integrates the baseband I/Q samples of a down-conversion element over the
// window of one readout pulse: all NS samples of every clock in which
// in_active is high are added to a running complex sum, which is handed out on
// res_* with res_valid in the clock after the pulse's last point (in_last) and
// then restarted from zero. The integration of the baseband series follows the
// published design; the window taken from the pulse itself and the 32-bit
// sums (enough for 4096 samples of 18 bits) are this design's choice. A pulse
// cut short by a new command (no in_last) is merged into the next window.
//
// Timing: res_valid one clock after the in_last clock.
module vec_accumulator
  import qubic_pkg::*;
#(
  parameter int ACC_W = 32
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_active,
  input  logic                   in_last,
  input  logic signed [BB_W-1:0] bb_i [NS],
  input  logic signed [BB_W-1:0] bb_q [NS],
  output logic                   res_valid,
  output logic signed [ACC_W-1:0] res_i,
  output logic signed [ACC_W-1:0] res_q
);
  logic signed [ACC_W-1:0] acc_i, acc_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_i <= '0; acc_q <= '0; res_valid <= 1'b0; res_i <= '0; res_q <= '0;
    end else begin
      res_valid <= 1'b0;
      if (in_active) begin
        logic signed [ACC_W-1:0] si, sq;
        si = acc_i;
        sq = acc_q;
        for (int k = 0; k < NS; k++) begin
          si += ACC_W'(bb_i[k]);
          sq += ACC_W'(bb_q[k]);
        end
        if (in_last) begin
          res_valid <= 1'b1;
          res_i <= si; res_q <= sq;
          acc_i <= '0; acc_q <= '0;
        end else begin
          acc_i <= si; acc_q <= sq;
        end
      end
    end
  end
endmodule
