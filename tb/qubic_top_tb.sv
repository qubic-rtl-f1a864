// qubic_top_tb -- end-to-end test of the whole gateware. All parameters are at
// their defaults except the acc buffer depth, reduced from 2^17 to 1024 entries
// so that the run reaches "acc buffer full" in a short simulation.
//
// Everything goes through the host bus, as software would use it:
//   * envelopes: a 96 ns DRAG-like pulse (Gaussian I, derivative Q, 0.873 of
//     full scale) on up element 0, flat pulses on up elements 1 and 2, flat
//     demodulation windows on down elements 4 and 5;
//   * commands: elements 0 and 1 at the same trigger time and destination
//     (one is issued late, their outputs add on DAC pair 0), a conditional
//     (fast reset) pulse of element 2 on DAC pair 1, two readout windows;
//   * the DAC pair 0 output is looped back into the ADC pair one clock later,
//     like the bench test that feeds the up-converted pulse back to the ADCs;
//   * the sequence repeats until the 1024-entry acc buffers are full.
// Checks: every DAC sample of every repetition against a floating-point model
// of eq. (1) and of the switch; each acc entry against the integral of
// ADC x conj(DLO) computed from the driven ADC samples; the conditional pulse
// absent while cond_ok is low and present after; the shot count and the stop
// when full; an acquisition capture of DAC 0 and of a DLO read back over the
// bus; acc clear. Each mechanism (late issue, adding in the switch, dropped
// and issued conditional gate, repetition, stop on full, acquisition, clear)
// is counted and must have happened.
module qubic_top_tb;
  import qubic_pkg::*;
  localparam int M = 4, K = 4, ND = 4, L = 2;
  localparam int PERIOD = 200;
  localparam int SHOTS  = 1024;           // acc buffer depth used here
  localparam real PI = 3.14159265358979;

  logic clk = 0, hclk = 0, rst = 1, hrst = 1;
  always #2 clk = ~clk;                   // 250 MHz
  always #4 hclk = ~hclk;                 // 125 MHz host side
  int checks = 0, failures = 0;

  logic h_we = 0, h_re = 0, h_rvalid;
  logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;
  sample_t adc [2][NS];
  sample_t dac [2*ND][NS];
  logic cond_ok = 0, seq_start, cmd_late, cmd_dropped;

  qubic_top #(.ACC_DEPTH(1024)) dut (.clk, .rst, .hclk, .hrst, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
                 .adc, .dac, .cond_ok, .seq_start, .cmd_late, .cmd_dropped);

  initial begin
    #5ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host bus ----------------------------------------------------------------
  task automatic hwrite(input logic [31:0] a, input logic [31:0] d);
    @(negedge hclk);
    h_we = 1; h_addr = a; h_wdata = d;
    @(negedge hclk);
    h_we = 0;
  endtask

  task automatic hread(input logic [31:0] a, output logic [31:0] d);
    @(negedge hclk);
    h_re = 1; h_addr = a;
    @(negedge hclk);
    h_re = 0;
    @(negedge hclk);
    if (!h_rvalid) begin failures++; $display("no rvalid"); end
    d = h_rdata;
  endtask

  // ---- the experiment ---------------------------------------------------------------
  logic [31:0] env [M+K][1024];
  cmd_t cmds [$];
  int   issue_d [$];     // decision timer of each command

  function automatic sample_t s16(input real v);
    return sample_t'(int'(v));
  endfunction

  task automatic add_cmd(input int elem, input int dest, input int trig, input int start, input int len,
                         input logic [23:0] freq, input logic [13:0] phase, input bit cond);
    cmd_t c;
    c = '0;
    c.element = 8'(elem); c.dest = 2'(dest); c.trig_t = 24'(trig); c.start = 12'(start);
    c.len = 12'(len); c.freq = freq; c.phase = phase; c.cond = cond;
    cmds.push_back(c);
  endtask

  function automatic void rot(input logic [31:0] e, input logic [23:0] a, output real ri, output real rq);
    real th, x, y;
    th = 2.0 * PI * real'(a) / 16777216.0;
    x = real'($signed(e[31:16]));
    y = real'($signed(e[15:0]));
    ri = x * $cos(th) - y * $sin(th);
    rq = x * $sin(th) + y * $cos(th);
  endfunction

  function automatic real fabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic logic [23:0] angle(input cmd_t c, input int t, input int k);
    return c.freq * 24'(4 * t + k) + {c.phase, 10'b0};
  endfunction

  // ---- per-clock model and monitors -------------------------------------------------
  int  t = -1;              // timer as seen by the testbench
  int  shot = -1;
  int  gcyc = -1;           // clocks since the first sequence start
  bit  cond_at_issue [int]; // cond_ok of each shot at the conditional's issue
  int  n_late = 0, n_drop = 0, n_cond_issued = 0, n_added = 0, n_seq = 0;
  int  dac0_hist [8192][NS];
  int  dlo_hist  [8192][NS];
  sample_t adc_hist [PERIOD][2][NS];
  int  max_err = 0;

  always @(posedge clk) begin
    // loop DAC pair 0 back into the ADC pair, one clock later
    adc[0] <= dac[0];
    adc[1] <= dac[1];
  end

  always @(negedge clk) if (!rst) begin
    if (seq_start) begin
      t = 0; shot++; n_seq++;
      // fast-reset condition: low for the first 3 shots, high afterwards
      cond_ok = (shot >= 3);
      cond_at_issue[shot] = cond_ok;
    end
    else if (t >= 0) t++;
    if (gcyc >= 0 || seq_start) gcyc++;
    if (cmd_late) n_late++;
    if (cmd_dropped) n_drop++;
    if (t >= 0 && t < PERIOD && shot < SHOTS) begin
      // DAC model
      for (int d = 0; d < 2; d++)
        for (int k = 0; k < NS; k++) begin
          real si, sq;
          int  nact;
          si = 0; sq = 0; nact = 0;
          foreach (cmds[j]) begin
            int i;
            i = t - issue_d[j] - 22;
            if (int'(cmds[j].element) < M && int'(cmds[j].dest) == d && i >= 0 && i < int'(cmds[j].len) &&
                (!cmds[j].cond || cond_at_issue[shot])) begin
              real ri, rq;
              rot(env[int'(cmds[j].element)][(int'(cmds[j].start) + i) % 1024], angle(cmds[j], t - 20, k), ri, rq);
              si += ri; sq += rq; nact++;
            end
          end
          if (nact > 1 && k == 0) n_added++;
          if (nact > 0 && d == 1 && k == 0 && t == issue_d[2] + 22) n_cond_issued++;
          si = (si > 32767.0) ? 32767.0 : (si < -32768.0 ? -32768.0 : si);
          sq = (sq > 32767.0) ? 32767.0 : (sq < -32768.0 ? -32768.0 : sq);
          checks++;
          if (fabs(real'(dac[2*d][k]) - si) > 8.0 || fabs(real'(dac[2*d+1][k]) - sq) > 8.0) begin
            failures++;
            if (failures < 10) $display("shot %0d t %0d dac pair %0d k %0d got %0d,%0d exp %f,%f", shot, t, d, k, dac[2*d][k], dac[2*d+1][k], si, sq);
          end
        end
      if (shot == 0) adc_hist[t] = adc;
    end
    if (gcyc >= 0 && gcyc < 8192)
      for (int k = 0; k < NS; k++) begin
        dac0_hist[gcyc][k] = int'(dac[0][k]);
        dlo_hist[gcyc][k]  = int'(dut.dlo_i[0][k]);
      end
  end


  // expected acc value of down command j, from shot-0 ADC samples
  function automatic void acc_model(input int j, output real ei, output real eq);
    ei = 0; eq = 0;
    for (int i = 0; i < int'(cmds[j].len); i++) begin
      int ta;
      ta = issue_d[j] + 21 + i;
      for (int k = 0; k < NS; k++) begin
        real di, dq, ai, aq;
        rot(env[int'(cmds[j].element)][(int'(cmds[j].start) + i) % 1024], angle(cmds[j], ta - 19, k), di, dq);
        ai = real'(adc_hist[ta][0][k]);
        aq = real'(adc_hist[ta][1][k]);
        ei += $floor((ai * di + aq * dq) / 32768.0);
        eq += $floor((aq * di - ai * dq) / 32768.0);
      end
    end
  endfunction

  initial begin
    logic [31:0] rd, rd2;
    int d, c0, c1;
    real ei, eq;
    for (int a = 0; a < 2; a++) for (int k = 0; k < NS; k++) adc[a][k] = 0;
    // envelopes
    for (int e = 0; e < M + K; e++) for (int a = 0; a < 1024; a++) env[e][a] = 0;
    for (int i = 0; i < 24; i++) begin           // 96 ns DRAG-like pulse, 0.873 full scale
      real x, g, dg;
      x = (real'(i) - 11.5) / 4.0;
      g = 0.873 * 32767.0 * $exp(-x * x / 2.0);
      dg = -0.5 * x * g / 4.0;
      env[0][100 + i] = {s16(g), s16(dg)};
    end
    for (int i = 0; i < 24; i++) env[1][i] = {16'sd6000, -16'sd3000};
    for (int i = 0; i < 12; i++) env[2][i] = {16'sd20000, 16'sd0};
    for (int i = 0; i < 32; i++) env[4][i] = {16'sd16384, 16'sd0};
    for (int i = 0; i < 16; i++) env[5][i] = {16'sd0, 16'sd12000};
    // command list (time order)
    add_cmd(0, 0, 10, 100, 24, 24'h19999a, 14'h1000, 0);  // 100 MHz, pi/2
    add_cmd(1, 0, 10,   0, 24, 24'h0ccccd, 14'h0000, 0);  // 50 MHz, same time: late
    add_cmd(2, 1, 12,   0, 12, 24'h266666, 14'h0800, 1);  // conditional (fast reset)
    add_cmd(4, 0, 13,   0, 32, 24'h19999a, 14'h1000, 0);  // readout window on the 100 MHz tone
    add_cmd(5, 0, 14,   0, 16, 24'h0ccccd, 14'h0000, 0);  // second readout channel
    d = -1;
    foreach (cmds[j]) begin
      int dj;
      dj = int'(cmds[j].trig_t);
      if (dj < d + 1) dj = d + 1;
      if (dj < 2) dj = 2;
      d = dj;
      issue_d.push_back(dj);
    end

    repeat (4) @(negedge hclk);
    hrst = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int e = 0; e < M + K; e++)
      for (int a = 0; a < 1024; a++)
        if (env[e][a] != 0) hwrite({4'd2, 8'(e), 10'd0, 10'(a)}, env[e][a]);
    foreach (cmds[j])
      for (int w = 0; w < 4; w++) hwrite({4'd1, 10'd0, 16'(j), 2'(w)}, cmds[j][32*w +: 32]);
    hwrite(32'h0000_0001, PERIOD);
    hwrite(32'h0000_0002, cmds.size());
    hwrite(32'h0000_0003, {16'd0, 8'd2, 8'd10});          // acq 0: DAC0, acq 1: DLO I of element 4
    hread(32'h0000_0001, rd);
    checks++;
    if (rd != PERIOD) begin failures++; $display("period readback %0d", rd); end
    hwrite(32'h0000_0000, 32'b11000);                     // arm both acquisition buffers
    repeat (20) @(negedge hclk);
    hwrite(32'h0000_0000, 32'b00001);                     // start
    // wait for the run to end
    do begin
      repeat (500) @(negedge hclk);
      hread(32'h0000_0004, rd);
    end while (rd[0]);
    hread(32'h0000_0005, rd);
    checks++;
    if (rd != SHOTS || !dut.acc_full) begin failures++; $display("shots %0d", rd); end
    for (int k = 0; k < 2; k++) begin
      hread(32'h0000_0010 + k, rd);
      checks++;
      if (rd != SHOTS) begin failures++; $display("acc count %0d = %0d", k, rd); end
    end
    hread(32'h0000_0004, rd);
    checks++;
    if (rd[9:8] != 2'b11 || !rd[1]) begin failures++; $display("status %h", rd); end
    // acc buffers: every entry equals the model
    for (int k = 0; k < 2; k++) begin
      acc_model(3 + k, ei, eq);
      $display("acc channel %0d expected %f %f", k, ei, eq);
      for (int n = 0; n < SHOTS; n += (n < 8 ? 1 : 37)) begin
        hread({4'd3, 8'(k), 9'd0, 10'(n), 1'b0}, rd);
        hread({4'd3, 8'(k), 9'd0, 10'(n), 1'b1}, rd2);
        checks++;
        if (fabs(real'($signed(rd)) - ei) > 600.0 || fabs(real'($signed(rd2)) - eq) > 600.0) begin
          failures++;
          if (failures < 20) $display("acc %0d entry %0d got %0d %0d exp %f %f", k, n, $signed(rd), $signed(rd2), ei, eq);
        end
      end
    end
    // acquisition: entry j holds the stream one clock before global clock j
    for (int j = 1; j < 1024; j += 7) begin
      hread({4'd4, 8'd0, 9'd0, 10'(j), 1'b0}, rd);
      hread({4'd4, 8'd0, 9'd0, 10'(j), 1'b1}, rd2);
      checks++;
      if ({rd2, rd} != {16'(dac0_hist[j-1][3]), 16'(dac0_hist[j-1][2]), 16'(dac0_hist[j-1][1]), 16'(dac0_hist[j-1][0])}) begin
        failures++;
        if (failures < 20) $display("acq0 %0d got %h%h", j, rd2, rd);
      end
      hread({4'd4, 8'd1, 9'd0, 10'(j), 1'b0}, rd);
      checks++;
      if (rd != {16'(dlo_hist[j-1][1]), 16'(dlo_hist[j-1][0])}) begin
        failures++;
        if (failures < 20) $display("acq1 %0d got %h", j, rd);
      end
    end
    // clear
    hwrite(32'h0000_0000, 32'b00100);
    repeat (20) @(negedge hclk);
    hread(32'h0000_0010, rd);
    hread(32'h0000_0004, rd2);
    checks++;
    if (rd != 0 || rd2[1]) begin failures++; $display("clear failed"); end
    // mechanisms
    $display("shots %0d late %0d dropped %0d cond issued %0d added clocks %0d", n_seq, n_late, n_drop, n_cond_issued, n_added);
    checks++;
    if (n_late != SHOTS) begin failures++; $display("late count"); end
    checks++;
    if (n_drop != 3 || n_cond_issued != SHOTS - 3) begin failures++; $display("conditional count"); end
    checks++;
    if (n_added == 0 || n_seq != SHOTS) begin failures++; $display("add/repeat count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
