// cmd_sequencer_tb -- checks the clock timer and command dispatch.
//
// A command list with spread, equal (stalling) and conditional trigger times
// is written into a command buffer. Each issued command must carry the next
// expected command, in the clock predicted by the issue rule
// d(i) = max(trig_t(i), d(i-1)+1, 2), with cmd_valid one clock later.
// Conditional commands are dropped while cond_ok is low. The sequence must
// repeat every period and stop at the period end after acc_full rises; a stop
// request must also end it at the period end.
module cmd_sequencer_tb;
  import qubic_pkg::*;
  logic clk = 0, hclk = 0, rst = 1;
  always #2 clk = ~clk;
  always #3 hclk = ~hclk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 256;
  logic we; logic [7:0] waddr; logic [127:0] wdata;
  logic re; logic [7:0] raddr; logic [127:0] rdata;
  logic start, stop, acc_full, cond_ok;
  logic [23:0] period; logic [8:0] ncmd;
  logic cmd_valid, seq_start, running, late, dropped;
  cmd_t cmd; logic [23:0] timer; logic [31:0] shots;

  cmd_buffer #(.DEPTH(DEPTH)) u_mem (.hclk, .we, .waddr, .wdata, .clk, .re, .raddr, .rdata);
  cmd_sequencer #(.DEPTH(DEPTH)) dut (.clk, .rst, .start, .stop, .period, .ncmd, .acc_full, .cond_ok,
    .mem_re(re), .mem_raddr(raddr), .mem_rdata(rdata), .cmd_valid, .cmd, .timer, .seq_start,
    .running, .late, .dropped, .shots);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cmd_t list [$];
  int   exp_timer [$];   // timer value seen with cmd_valid
  int   exp_idx [$];
  int   n_late = 0, n_drop = 0, n_seq = 0, got = 0;

  task automatic build(input int n);
    int t = 0;
    list.delete();
    for (int i = 0; i < n; i++) begin
      cmd_t c;
      c = cmd_t'({$urandom, $urandom, $urandom, $urandom});
      c.reserved = '0;
      t += (i % 5 == 2) ? 0 : $urandom_range(0, 6);   // some equal trigger times
      c.trig_t = 24'(t);
      c.cond = (i % 7 == 3);
      list.push_back(c);
    end
  endtask

  // expected issue clocks for one period, given cond_ok
  task automatic predict(input bit cok);
    int d = -1;
    exp_timer.delete(); exp_idx.delete();
    foreach (list[i]) begin
      int di;
      di = int'(list[i].trig_t);
      if (di < d + 1) di = d + 1;
      if (di < 2) di = 2;
      d = di;
      if (!list[i].cond || cok) begin
        exp_timer.push_back(di + 1);
        exp_idx.push_back(i);
      end
    end
  endtask

  always @(negedge clk) if (!rst) begin
    if (late) n_late++;
    if (dropped) n_drop++;
    if (seq_start) n_seq++;
    if (cmd_valid) begin
      checks++;
      got++;
      if (exp_idx.size() == 0) begin
        failures++; $display("unexpected command at timer %0d", timer);
      end else begin
        int i, et;
        i = exp_idx.pop_front();
        et = exp_timer.pop_front();
        if (cmd != list[i] || int'(timer) != et) begin
          failures++;
          if (failures < 10) $display("cmd %0d at timer %0d, expected timer %0d", i, timer, et);
        end
      end
    end
  end

  task automatic load();
    foreach (list[i]) begin
      @(negedge hclk);
      we = 1; waddr = 8'(i); wdata = list[i];
    end
    @(negedge hclk) we = 0;
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; start = 0; stop = 0; acc_full = 0; cond_ok = 1;
    period = 400; ncmd = 0;
    build(60);
    load();
    ncmd = 60;
    repeat (4) @(negedge clk);
    rst = 0;
    // run 1: cond_ok high, three periods, acc_full raised during the third
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int p = 0; p < 3; p++) begin
      predict(1'b1);
      wait (exp_idx.size() == 0);
      if (p == 2) acc_full = 1;
      wait (timer == 24'(period - 1));
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (p < 2 && (!running || shots != 32'(p + 1))) begin failures++; $display("did not repeat %0d", p); end
    end
    checks++;
    if (running || shots != 3) begin failures++; $display("did not stop on acc_full, shots %0d", shots); end
    acc_full = 0;
    // run 2: cond_ok low, conditional commands dropped; stop request
    cond_ok = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    predict(1'b0);
    repeat (50) @(negedge clk);
    stop = 1;
    @(negedge clk) stop = 0;
    wait (!running);
    @(negedge clk);
    checks++;
    if (exp_idx.size() != 0 || shots != 1) begin failures++; $display("stop: left %0d shots %0d", exp_idx.size(), shots); end
    // every mechanism must have happened
    checks++;
    if (n_late == 0 || n_drop == 0 || n_seq != 4) begin
      failures++; $display("late %0d drop %0d seq %0d", n_late, n_drop, n_seq);
    end
    $display("issued %0d late %0d dropped %0d", got, n_late, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
