// host_interface_tb -- checks the host register and memory map.
//
// Writes and reads every register, assembles 64 random 128-bit commands from
// four lane writes each, routes envelope writes to the addressed element, reads acc and
// acq buffer words (modelled here as one-clock RAMs whose data is a function
// of the address) and checks that start/stop/clear/arm each arrive on the DSP
// clock as exactly one one-clock pulse, and that status words cross back.
module host_interface_tb;
  import qubic_pkg::*;
  localparam int M = 4, K = 4, L = 2;
  logic clk = 0, hclk = 0, rst = 1, hrst = 1;
  always #2 clk = ~clk;
  always #5 hclk = ~hclk;
  int checks = 0, failures = 0;

  logic h_we = 0, h_re = 0, h_rvalid;
  logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;
  logic cmd_we; logic [15:0] cmd_waddr; logic [127:0] cmd_wdata;
  logic [M+K-1:0] env_we; logic [9:0] env_waddr; logic [31:0] env_wdata;
  logic [9:0] acc_raddr, acq_raddr;
  logic [63:0] acc_rdata [K], acq_rdata [L];
  logic start, stop, acc_clear; logic [L-1:0] acq_arm, acq_done;
  logic [23:0] period; logic [16:0] ncmd; logic [7:0] acq_sel [L];
  logic running = 0, acc_full = 0; logic [31:0] shots = 0; logic [10:0] acc_count [K];

  host_interface #(.M(M), .K(K), .L(L), .ACC_DEPTH(1024)) dut (.hclk, .hrst, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .cmd_we, .cmd_waddr, .cmd_wdata, .env_we, .env_waddr, .env_wdata, .acc_raddr, .acc_rdata, .acq_raddr, .acq_rdata,
    .clk, .rst, .start, .stop, .acc_clear, .acq_arm, .period, .ncmd, .acq_sel,
    .running, .shots, .acc_count, .acc_full, .acq_done);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // RAM models
  always @(posedge hclk) begin
    for (int k = 0; k < K; k++) acc_rdata[k] <= {22'(k), acc_raddr, 22'(k + 7), acc_raddr};
    for (int l = 0; l < L; l++) acq_rdata[l] <= {12'(l + 3), acq_raddr, 10'd0, 12'(l), acq_raddr, 10'd1};
  end

  // pulse counters on the DSP side
  int n_start = 0, n_stop = 0, n_clear = 0, n_arm [L];
  always @(posedge clk) if (!rst) begin
    if (start) n_start++;
    if (stop) n_stop++;
    if (acc_clear) n_clear++;
    for (int l = 0; l < L; l++) if (acq_arm[l]) n_arm[l]++;
  end

  // bus monitor: command and envelope writes
  logic [127:0] last_cmd; logic [15:0] last_cmd_addr; int n_cmd = 0;
  logic [M+K-1:0] last_env_we; logic [9:0] last_env_addr; logic [31:0] last_env_data;
  always @(posedge hclk) begin
    if (cmd_we) begin last_cmd <= cmd_wdata; last_cmd_addr <= cmd_waddr; n_cmd++; end
    if (|env_we) begin last_env_we <= env_we; last_env_addr <= env_waddr; last_env_data <= env_wdata; end
  end

  task automatic hwrite(input logic [31:0] a, input logic [31:0] d);
    @(negedge hclk); h_we = 1; h_addr = a; h_wdata = d;
    @(negedge hclk); h_we = 0;
  endtask
  task automatic hread(input logic [31:0] a, output logic [31:0] d);
    @(negedge hclk); h_re = 1; h_addr = a;
    @(negedge hclk); h_re = 0;
    checks++;
    if (h_rvalid) failures++;          // not yet: two cycles of latency
    @(negedge hclk);
    checks++;
    if (!h_rvalid) failures++;
    d = h_rdata;
  endtask
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] rd;
    logic [127:0] c;
    n_arm = '{0, 0};
    for (int k = 0; k < K; k++) acc_count[k] = 11'(100 + k);
    repeat (3) @(negedge hclk);
    hrst = 0; rst = 0;
    hwrite(32'h0000_0001, 32'd12345);
    hwrite(32'h0000_0002, 32'd777);
    hwrite(32'h0000_0003, 32'h0000_0b0a);
    hread(32'h0000_0001, rd); chk(rd == 12345, "period readback");
    hread(32'h0000_0002, rd); chk(rd == 777, "ncmd readback");
    hread(32'h0000_0003, rd); chk(rd == 32'h0b0a, "acqsel readback");
    repeat (30) @(negedge clk);
    chk(period == 12345 && ncmd == 777 && acq_sel[0] == 8'h0a && acq_sel[1] == 8'h0b, "ctrl crossed");
    // pulses
    hwrite(32'h0000_0000, 32'b00001);
    hwrite(32'h0000_0000, 32'b00010);
    hwrite(32'h0000_0000, 32'b00100);
    hwrite(32'h0000_0000, 32'b10000);
    repeat (40) @(negedge clk);
    hwrite(32'h0000_0000, 32'b01001);
    repeat (40) @(negedge clk);
    chk(n_start == 2 && n_stop == 1 && n_clear == 1 && n_arm[0] == 1 && n_arm[1] == 1, "pulses");
    // status crossing
    running = 1; acc_full = 1; acq_done = 2'b10; shots = 32'hdead_beef;
    repeat (40) @(negedge clk);
    hread(32'h0000_0004, rd); chk(rd == 32'h0000_0203, "status");
    hread(32'h0000_0005, rd); chk(rd == 32'hdead_beef, "shots");
    for (int k = 0; k < K; k++) begin
      hread(32'h0000_0010 + k, rd); chk(rd == 100 + k, "acc count");
    end
    // command assembly
    for (int n = 0; n < 64; n++) begin
      logic [15:0] ca;
      c = {$urandom, $urandom, $urandom, $urandom};
      ca = (n == 0) ? 16'h1234 : (n == 1) ? 16'hffff : 16'($urandom);
      for (int w = 0; w < 4; w++) hwrite({4'd1, 10'd0, ca, 2'(w)}, c[32*w +: 32]);
      @(negedge hclk);
      chk(n_cmd == n + 1 && last_cmd == c && last_cmd_addr == ca, "command assembly");
    end
    // envelope routing
    for (int e = 0; e < M + K; e++) begin
      hwrite({4'd2, 8'(e), 10'd0, 10'(e * 3)}, 32'(e * 1000 + 1));
      @(negedge hclk);
      chk(last_env_we == (8'd1 << e) && last_env_addr == 10'(e * 3) && last_env_data == 32'(e * 1000 + 1), "envelope routing");
    end
    // acc and acq reads
    for (int k = 0; k < K; k++) begin
      hread({4'd3, 8'(k), 9'd0, 10'd55, 1'b0}, rd); chk(rd == {22'(k), 10'd55}, "acc I");
      hread({4'd3, 8'(k), 9'd0, 10'd56, 1'b1}, rd); chk(rd == {22'(k + 7), 10'd56}, "acc Q");
    end
    for (int l = 0; l < L; l++) begin
      hread({4'd4, 8'(l), 9'd0, 10'd9, 1'b0}, rd); chk(rd == {12'(l), 10'd9, 10'd1}, "acq lo");
      hread({4'd4, 8'(l), 9'd0, 10'd9, 1'b1}, rd); chk(rd == {12'(l + 3), 10'd9, 10'd0}, "acq hi");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
