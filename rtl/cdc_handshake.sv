// cdc_handshake -- carries a multi-bit word from one clock domain to another.
//
// The source side samples src_data whenever the previous transfer has been
// acknowledged and flips a request toggle; the destination side synchronises
// the toggle through two flip-flops, copies the (by then stable) word to
// dst_data and flips an acknowledge toggle that travels back the same way.
// The word is re-sent continuously, so dst_data follows src_data with a delay
// of a few clocks of each domain and is never seen half-updated. Pulses are
// carried as toggles inside the word by the user of this block.
module cdc_handshake #(
  parameter int W = 32
) (
  input  logic         src_clk,
  input  logic         src_rst,
  input  logic [W-1:0] src_data,
  input  logic         dst_clk,
  input  logic         dst_rst,
  output logic [W-1:0] dst_data
);
  logic         req, ack_s1, ack_s2;
  logic [W-1:0] hold;
  logic         req_s1, req_s2, req_s3;

  always_ff @(posedge src_clk) begin
    if (src_rst) begin
      req <= 1'b0; ack_s1 <= 1'b0; ack_s2 <= 1'b0; hold <= '0;
    end else begin
      ack_s1 <= req_s3;
      ack_s2 <= ack_s1;
      if (ack_s2 == req) begin
        hold <= src_data;
        req  <= ~req;
      end
    end
  end

  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      req_s1 <= 1'b0; req_s2 <= 1'b0; req_s3 <= 1'b0; dst_data <= '0;
    end else begin
      req_s1 <= req;
      req_s2 <= req_s1;
      req_s3 <= req_s2;
      if (req_s2 != req_s3) dst_data <= hold;
    end
  end
endmodule
