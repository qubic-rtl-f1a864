// cordic_rot_tb -- checks the CORDIC rotator against a floating-point model.
//
// Random vectors and angles (plus the four exact quadrant angles) are fed one
// per clock; each output, taken ITER+2 clocks later, must match
// (x + jy) * exp(j*2*pi*ang/2^24) within 3 LSB. The latency is checked by
// construction: outputs are compared at exactly the expected cycle.
module cordic_rot_tb;
  localparam int LAT = 16 + 2;
  localparam int N   = 400;
  logic clk = 0;
  always #2 clk = ~clk;
  logic signed [15:0] xi, yi, xo, yo;
  logic [23:0] ang;
  int checks = 0, failures = 0;
  real ex [N], ey [N];

  cordic_rot dut (.clk, .xi, .yi, .ang, .xo, .yo);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, xr, yr;
    xi = 0; yi = 0; ang = 0;
    for (int n = 0; n < N + LAT; n++) begin
      @(negedge clk);
      if (n < N) begin
        // keep |v| below full scale so the rotated value cannot saturate
        xi = 16'(int'($urandom_range(0, 46000)) - 23000);
        yi = 16'(int'($urandom_range(0, 46000)) - 23000);
        ang = (n < 4) ? 24'(n) << 22 : 24'($urandom);
        a = 2.0 * 3.14159265358979 * real'(ang) / 16777216.0;
        ex[n] = real'(xi) * $cos(a) - real'(yi) * $sin(a);
        ey[n] = real'(xi) * $sin(a) + real'(yi) * $cos(a);
      end
      if (n >= LAT) begin
        int k;
        k = n - LAT;
        // sample before the next rising edge: value produced for input k
        checks++;
        if ((real'(xo) - ex[k] > 3.0) || (ex[k] - real'(xo) > 3.0) ||
            (real'(yo) - ey[k] > 3.0) || (ey[k] - real'(yo) > 3.0)) begin
          failures++;
          if (failures < 10) $display("mismatch %0d: got %0d,%0d exp %f,%f", k, xo, yo, ex[k], ey[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
