// cmd_buffer_tb -- writes random commands at random addresses on the host
// clock and reads them back on the DSP clock, checking the one-clock latency
// and that rdata holds while re is low. Full 64k depth.
module cmd_buffer_tb;
  logic clk = 0, hclk = 0;
  always #2 clk = ~clk;
  always #3 hclk = ~hclk;
  int checks = 0, failures = 0;
  logic we, re; logic [15:0] waddr, raddr; logic [127:0] wdata, rdata;
  logic [127:0] ref_mem [int];
  int addrs [$];

  cmd_buffer dut (.hclk, .we, .waddr, .wdata, .clk, .re, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge hclk);
      we = 1;
      waddr = (i == 0) ? 16'hffff : (i == 1) ? 16'h0000 : 16'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      if (!ref_mem.exists(int'(waddr))) addrs.push_back(int'(waddr));
      ref_mem[int'(waddr)] = wdata;
    end
    @(negedge hclk) we = 0;
    foreach (addrs[i]) begin
      @(negedge clk);
      re = 1; raddr = 16'(addrs[i]);
      @(negedge clk);
      re = 0; raddr = 16'($urandom);
      checks++;
      if (rdata != ref_mem[addrs[i]]) failures++;
      @(negedge clk);
      checks++;
      if (rdata != ref_mem[addrs[i]]) failures++;   // held while re is low
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
