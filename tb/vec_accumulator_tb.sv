// vec_accumulator_tb -- checks window integration of baseband samples.
//
// Windows of random length with random gaps feed random baseband samples; the
// result after each window's last point must equal the sums computed here and
// must appear exactly one clock after that point.
module vec_accumulator_tb;
  import qubic_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  int checks = 0, failures = 0, nres = 0;
  logic in_active, in_last, res_valid;
  logic signed [BB_W-1:0] bb_i [NS], bb_q [NS];
  logic signed [31:0] res_i, res_q;
  longint si, sq;
  bit pend = 0;
  longint ei, eq;

  vec_accumulator dut (.clk, .rst, .in_active, .in_last, .bb_i, .bb_q, .res_valid, .res_i, .res_q);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check output every clock against the pending expectation
  always @(negedge clk) if (!rst) begin
    checks++;
    if (res_valid !== pend || (pend && (res_i != 32'(ei) || res_q != 32'(eq)))) begin
      failures++;
      if (failures < 10) $display("res_valid %0d exp %0d got %0d,%0d exp %0d,%0d", res_valid, pend, res_i, res_q, ei, eq);
    end
    if (res_valid) nres++;
  end

  initial begin
    in_active = 0; in_last = 0;
    for (int k = 0; k < NS; k++) begin bb_i[k] = 0; bb_q[k] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 0; w < 40; w++) begin
      int len;
      len = $urandom_range(1, 200);
      si = 0; sq = 0;
      for (int i = 0; i < len; i++) begin
        @(posedge clk); #1;
        pend = 0;
        in_active = 1; in_last = (i == len - 1);
        for (int k = 0; k < NS; k++) begin
          bb_i[k] = BB_W'($urandom); bb_q[k] = BB_W'($urandom);
          si += longint'(bb_i[k]); sq += longint'(bb_q[k]);
        end
        if (in_last) begin ei = si; eq = sq; end
      end
      repeat ($urandom_range(1, 5)) begin
        @(posedge clk); #1;
        pend = in_last;
        in_active = 0; in_last = 0;
        for (int k = 0; k < NS; k++) begin bb_i[k] = BB_W'($urandom); bb_q[k] = BB_W'($urandom); end
      end
    end
    @(posedge clk); #1 pend = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (nres != 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
