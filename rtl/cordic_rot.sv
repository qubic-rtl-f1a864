// cordic_rot -- pipelined rotation-mode CORDIC phase rotator.
//
// Rotates the complex sample xi + j*yi by the angle ang, where the full circle
// is 2^AW: (xo + j*yo) = (xi + j*yi) * exp(j*2*pi*ang/2^AW). The two top bits of
// the angle select an exact rotation by a multiple of 90 degrees; the remaining
// angle (0..90 degrees) is removed by ITER shift-and-add micro-rotations. The
// CORDIC gain (about 1.6468) is taken out by one constant multiplication at the
// end, so the output has the input's scale. Two guard bits are carried inside.
//
// The gateware uses a CORDIC for its amplitude/phase to I/Q conversions; this
// design folds the envelope amplitude and the carrier phase into one vector
// rotation. Iteration count, guard bits and rounding are this design's choice.
//
// Timing: fully pipelined, one sample per clock, latency ITER+2 clocks.
module cordic_rot #(
  parameter int ITER = 16,
  parameter int IW   = 16,
  parameter int AW   = 24
) (
  input  logic                 clk,
  input  logic signed [IW-1:0] xi,
  input  logic signed [IW-1:0] yi,
  input  logic        [AW-1:0] ang,
  output logic signed [IW-1:0] xo,
  output logic signed [IW-1:0] yo
);
  localparam int G  = 2;          // guard bits
  localparam int W  = IW + G + 3; // internal width: sign, x2 for 90-degree swap, gain 1.65, sqrt2
  localparam int ZW = AW + 2;

  // atan(2^-i) in units of 2*pi/2^24, scaled to AW; small-angle form past i = 15.
  function automatic logic signed [ZW-1:0] atan_tab(input int i);
    int unsigned t [16] = '{2097152, 1238021, 654136, 332050, 166669, 83416, 41718, 20860,
                            10430, 5215, 2608, 1304, 652, 326, 163, 81};
    longint v;
    v = (i < 16) ? longint'(t[i]) : (longint'(2670177) >> i);
    if (AW >= 24) v = v <<< (AW - 24);
    else          v = v >>> (24 - AW);
    return ZW'(v);
  endfunction

  // 2^16 / 1.6467602581 rounded
  localparam logic [16:0] KINV = 17'd39797;

  logic signed [W-1:0]  x [ITER+1];
  logic signed [W-1:0]  y [ITER+1];
  logic signed [ZW-1:0] z [ITER+1];

  // Stage 0: exact quadrant rotation, residual angle in [0, 90) degrees.
  always_ff @(posedge clk) begin
    logic signed [W-1:0] xe, ye;
    xe = W'(xi) <<< G;
    ye = W'(yi) <<< G;
    unique case (ang[AW-1 -: 2])
      2'd0: begin x[0] <= xe;  y[0] <= ye;  end
      2'd1: begin x[0] <= -ye; y[0] <= xe;  end
      2'd2: begin x[0] <= -xe; y[0] <= -ye; end
      2'd3: begin x[0] <= ye;  y[0] <= -xe; end
    endcase
    z[0] <= ZW'({2'b00, 2'b00, ang[AW-3:0]});
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk) begin
      if (!z[i][ZW-1]) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - atan_tab(i);
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + atan_tab(i);
      end
    end
  end

  // Gain correction, guard-bit removal with rounding, saturation.
  localparam int PW = W + 18;
  always_ff @(posedge clk) begin
    logic signed [PW-1:0] px, py;
    px = (PW'(x[ITER]) * PW'(signed'({1'b0, KINV})) + (PW'(1) <<< (15 + G))) >>> (16 + G);
    py = (PW'(y[ITER]) * PW'(signed'({1'b0, KINV})) + (PW'(1) <<< (15 + G))) >>> (16 + G);
    xo <= (px > PW'((1 <<< (IW-1)) - 1)) ? IW'((1 <<< (IW-1)) - 1) :
          (px < -PW'(1 <<< (IW-1)))      ? IW'(1 <<< (IW-1)) : px[IW-1:0];
    yo <= (py > PW'((1 <<< (IW-1)) - 1)) ? IW'((1 <<< (IW-1)) - 1) :
          (py < -PW'(1 <<< (IW-1)))      ? IW'(1 <<< (IW-1)) : py[IW-1:0];
  end
endmodule
