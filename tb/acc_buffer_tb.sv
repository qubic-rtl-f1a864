// acc_buffer_tb -- checks storing, full flag, drop-when-full, host read and clear.
module acc_buffer_tb;
  logic clk = 0, hclk = 0, rst = 1;
  always #2 clk = ~clk;
  always #3 hclk = ~hclk;
  int checks = 0, failures = 0;
  localparam int D = 64;
  logic clear, wr, full;
  logic [31:0] wi, wq;
  logic [6:0] count;
  logic [5:0] raddr;
  logic [63:0] rdata;
  logic [63:0] ref_mem [D];

  acc_buffer #(.DEPTH(D)) dut (.clk, .rst, .clear, .wr, .wi, .wq, .count, .full, .hclk, .raddr, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr = 1; wi = $urandom; wq = $urandom;
      if (i < D) ref_mem[i] = {wi, wq};
      @(negedge clk);
      wr = 0;
      checks++;
      if (int'(count) != ((i + 1 < D) ? i + 1 : D) || full != (i + 1 >= D)) begin
        failures++; $display("count %0d full %0d after %0d", count, full, i + 1);
      end
    end
  endtask

  task automatic readback(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge hclk) raddr = 6'(i);
      @(negedge hclk);
      checks++;
      if (rdata != ref_mem[i]) begin failures++; $display("entry %0d got %h exp %h", i, rdata, ref_mem[i]); end
    end
  endtask

  initial begin
    clear = 0; wr = 0; wi = 0; wq = 0; raddr = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    fill(D + 5);          // five past full are dropped
    readback(D);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (count != 0 || full) failures++;
    fill(10);
    readback(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
