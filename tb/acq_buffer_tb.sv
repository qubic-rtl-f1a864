// acq_buffer_tb -- checks arm, trigger alignment, capture length and host read.
//
// A counting stream is fed; after arming, the buffer must hold DEPTH
// consecutive words starting with the word present in the trigger clock, and
// raise done exactly DEPTH clocks after the trigger. A trigger before arming
// must be ignored.
module acq_buffer_tb;
  import qubic_pkg::*;
  localparam int D = 64;
  logic clk = 0, hclk = 0, rst = 1;
  always #2 clk = ~clk;
  always #3 hclk = ~hclk;
  int checks = 0, failures = 0;
  logic arm, trig, done;
  sample_t din [NS];
  logic [5:0] raddr;
  logic [63:0] rdata;
  int cnt = 0;

  acq_buffer #(.DEPTH(D)) dut (.clk, .rst, .arm, .trig, .din, .done, .hclk, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cnt <= cnt + 1;
    for (int k = 0; k < NS; k++) din[k] <= sample_t'(4 * (cnt + 1) + k);
  end

  task automatic capture_check(input int tc);
    int base;
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    repeat (7) @(negedge clk);
    trig = 1;
    base = int'(din[0]);
    @(negedge clk) trig = 0;
    repeat (D - 1) begin
      checks++;
      if (done) failures++;
      @(negedge clk);
    end
    checks++;
    if (!done) begin failures++; $display("done late"); end
    for (int i = 0; i < D; i++) begin
      @(negedge hclk) raddr = 6'(i);
      @(negedge hclk);
      for (int k = 0; k < NS; k++) begin
        checks++;
        if (rdata[16*k +: 16] != 16'(base + 4 * i + k)) begin
          failures++;
          if (failures < 10) $display("capture %0d entry %0d k %0d got %0d exp %0d", tc, i, k, rdata[16*k +: 16], base + 4*i + k);
        end
      end
    end
  endtask

  initial begin
    arm = 0; trig = 0; raddr = 0;
    for (int k = 0; k < NS; k++) din[k] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk) trig = 1;     // not armed: ignored
    @(negedge clk) trig = 0;
    repeat (D + 5) @(negedge clk);
    checks++;
    if (done) failures++;
    capture_check(0);
    capture_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
