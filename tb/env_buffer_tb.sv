// env_buffer_tb -- fills the 1k x 32 envelope buffer on the host clock and
// reads every point back on the DSP clock with one clock of latency.
module env_buffer_tb;
  logic clk = 0, hclk = 0;
  always #2 clk = ~clk;
  always #3 hclk = ~hclk;
  int checks = 0, failures = 0;
  logic we; logic [9:0] waddr, raddr; logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [1024];

  env_buffer dut (.hclk, .we, .waddr, .wdata, .clk, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge hclk);
      we = 1; waddr = 10'(1023 - i); wdata = $urandom; ref_mem[1023 - i] = wdata;
    end
    @(negedge hclk) we = 0;
    for (int i = 0; i < 1024; i++) begin
      int a;
      a = (i * 37) % 1024;
      @(negedge clk) raddr = 10'(a);
      @(negedge clk);
      checks++;
      if (rdata != ref_mem[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
