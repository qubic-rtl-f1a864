// rb_workload_tb -- a single-qubit randomized-benchmarking style sequence on
// the gateware at its full default size (no parameter overridden).
//
// The sequence is 512 random Cliffords, each played as two 32 ns X90 pulses
// (8 envelope points) whose carrier phase carries the accumulated virtual Z
// rotations (random multiples of 90 degrees in the 14-bit phase field), so one
// stored envelope serves every pulse. The 1024 drive pulses go back to back
// every 8 clocks on DAC pair 0, followed by a 256 ns readout tone on DAC pair 3
// that is looped back into the ADC pair and integrated by down element 4.
// The sequence is repeated for SHOTS repetitions and then stopped from the host.
// Checks: no command issued late; every drive and readout DAC sample of every
// repetition against a floating-point model; the number of readout results;
// all results equal (the sequence is replayed identically) and equal to the
// model of ADC x conj(DLO).
module rb_workload_tb;
  import qubic_pkg::*;
  localparam int NCLIFF = 512;
  localparam int NPULSE = 2 * NCLIFF;
  localparam int GAP    = 8;                 // clocks between drive pulses
  localparam int T0     = 10;
  localparam int TRO    = T0 + NPULSE * GAP + 4;
  localparam int PERIOD = TRO + 120;
  localparam int SHOTS  = 4;
  localparam real PI = 3.14159265358979;

  logic clk = 0, hclk = 0, rst = 1, hrst = 1;
  always #2 clk = ~clk;
  always #4 hclk = ~hclk;
  int checks = 0, failures = 0;

  logic h_we = 0, h_re = 0, h_rvalid;
  logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;
  sample_t adc [2][NS];
  sample_t dac [8][NS];
  logic cond_ok = 0, seq_start, cmd_late, cmd_dropped;

  qubic_top dut (.clk, .rst, .hclk, .hrst, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
                 .adc, .dac, .cond_ok, .seq_start, .cmd_late, .cmd_dropped);

  initial begin
    #5ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(input logic [31:0] a, input logic [31:0] d);
    @(negedge hclk); h_we = 1; h_addr = a; h_wdata = d;
    @(negedge hclk); h_we = 0;
  endtask
  task automatic hread(input logic [31:0] a, output logic [31:0] d);
    @(negedge hclk); h_re = 1; h_addr = a;
    @(negedge hclk); h_re = 0;
    @(negedge hclk); d = h_rdata;
  endtask

  function automatic real fabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic void rot(input logic [31:0] e, input logic [23:0] a, output real ri, output real rq);
    real th, x, y;
    th = 2.0 * PI * real'(a) / 16777216.0;
    x = real'($signed(e[31:16]));
    y = real'($signed(e[15:0]));
    ri = x * $cos(th) - y * $sin(th);
    rq = x * $sin(th) + y * $cos(th);
  endfunction

  logic [31:0] env [8][1024];
  cmd_t cmds [$];
  // which command drives pair 0 / pair 3 at each timer value
  int drive_at [PERIOD];
  int ro_at [PERIOD];
  sample_t adc_hist [PERIOD][2][NS];

  function automatic logic [23:0] angle(input cmd_t c, input int t, input int k);
    return c.freq * 24'(4 * t + k) + {c.phase, 10'b0};
  endfunction

  // expected DAC pair value at timer t from command index j (or nothing)
  function automatic void dac_model(input int j, input int t, input int k, output real ei, output real eq);
    ei = 0; eq = 0;
    if (j >= 0) begin
      int i;
      i = t - int'(cmds[j].trig_t) - 22;
      rot(env[int'(cmds[j].element)][int'(cmds[j].start) + i], angle(cmds[j], t - 20, k), ei, eq);
    end
  endfunction

  int t = -1, shot = -1, n_late = 0, n_pts = 0;
  always @(posedge clk) begin
    adc[0] <= dac[6];
    adc[1] <= dac[7];
  end
  always @(negedge clk) if (!rst) begin
    if (seq_start) begin t = 0; shot++; end
    else if (t >= 0) t++;
    if (cmd_late) n_late++;
    if (t >= 0 && t < PERIOD && shot < SHOTS) begin
      for (int k = 0; k < NS; k++) begin
        real ei, eq, ri, rq;
        dac_model(drive_at[t], t, k, ei, eq);
        dac_model(ro_at[t], t, k, ri, rq);
        checks++;
        if (fabs(real'(dac[0][k]) - ei) > 4.0 || fabs(real'(dac[1][k]) - eq) > 4.0 ||
            fabs(real'(dac[6][k]) - ri) > 4.0 || fabs(real'(dac[7][k]) - rq) > 4.0) begin
          failures++;
          if (failures < 10) $display("shot %0d t %0d k %0d drive %0d,%0d exp %f,%f", shot, t, k, dac[0][k], dac[1][k], ei, eq);
        end
      end
      if (drive_at[t] >= 0) n_pts++;
      if (shot == 0) adc_hist[t] = adc;
    end
  end

  initial begin
    logic [31:0] rd, rd2, first_i, first_q;
    logic [13:0] vz;
    real ei, eq;
    int j;
    for (int a = 0; a < 2; a++) for (int k = 0; k < NS; k++) adc[a][k] = 0;
    for (int e = 0; e < 8; e++) for (int a = 0; a < 1024; a++) env[e][a] = 0;
    for (int tt = 0; tt < PERIOD; tt++) begin drive_at[tt] = -1; ro_at[tt] = -1; end
    for (int i = 0; i < 8; i++) begin         // 32 ns Gaussian X90
      real x;
      x = (real'(i) - 3.5) / 2.0;
      env[0][i] = {16'(int'(0.45 * 32767.0 * $exp(-x * x / 2.0))), 16'd0};
    end
    for (int i = 0; i < 64; i++) env[3][i] = {16'sd12000, 16'sd0};   // readout tone
    for (int i = 0; i < 64; i++) env[4][i] = {16'sd16384, 16'sd0};   // demodulation window
    // drive pulses with random virtual Z in the phase
    vz = 0;
    for (int p = 0; p < NPULSE; p++) begin
      cmd_t c;
      vz = vz + {2'($urandom), 12'd0};
      c = '0;
      c.element = 0; c.dest = 0; c.start = 0; c.len = 8;
      c.freq = 24'h0ccccd; c.phase = vz; c.trig_t = 24'(T0 + p * GAP);
      cmds.push_back(c);
      for (int i = 0; i < 8; i++) drive_at[T0 + p * GAP + 22 + i] = p;
    end
    begin
      cmd_t c;
      c = '0;
      c.element = 3; c.dest = 3; c.start = 0; c.len = 64; c.freq = 24'h1e1e1e; c.trig_t = 24'(TRO);
      cmds.push_back(c);
      for (int i = 0; i < 64; i++) ro_at[TRO + 22 + i] = NPULSE;
      c.element = 4; c.dest = 0; c.trig_t = 24'(TRO + 1);
      cmds.push_back(c);
    end

    repeat (4) @(negedge hclk);
    hrst = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 8; e++)
      for (int a = 0; a < 64; a++)
        if (env[e][a] != 0) hwrite({4'd2, 8'(e), 10'd0, 10'(a)}, env[e][a]);
    foreach (cmds[q])
      for (int w = 0; w < 4; w++) hwrite({4'd1, 10'd0, 16'(q), 2'(w)}, cmds[q][32*w +: 32]);
    hwrite(32'h0000_0001, PERIOD);
    hwrite(32'h0000_0002, cmds.size());
    hwrite(32'h0000_0000, 32'b1);               // start
    wait (shot == SHOTS - 1);
    hwrite(32'h0000_0000, 32'b10);              // stop at the end of this repetition
    do begin
      repeat (200) @(negedge hclk);
      hread(32'h0000_0004, rd);
    end while (rd[0]);
    hread(32'h0000_0010, rd);
    checks++;
    if (rd != SHOTS) begin failures++; $display("readouts %0d", rd); end
    // expected readout result from shot-0 ADC samples
    j = NPULSE + 1;
    ei = 0; eq = 0;
    for (int i = 0; i < 64; i++) begin
      int ta;
      ta = int'(cmds[j].trig_t) + 1 + 20 + i;
      for (int k = 0; k < NS; k++) begin
        real di, dq, ai, aq;
        rot(env[4][i], angle(cmds[j], ta - 19, k), di, dq);
        ai = real'(adc_hist[ta][0][k]);
        aq = real'(adc_hist[ta][1][k]);
        ei += $floor((ai * di + aq * dq) / 32768.0);
        eq += $floor((aq * di - ai * dq) / 32768.0);
      end
    end
    for (int n = 0; n < SHOTS; n++) begin
      hread({4'd3, 8'd0, 9'd0, 10'(n), 1'b0}, rd);
      hread({4'd3, 8'd0, 9'd0, 10'(n), 1'b1}, rd2);
      if (n == 0) begin first_i = rd; first_q = rd2; end
      checks++;
      if (rd != first_i || rd2 != first_q || fabs(real'($signed(rd)) - ei) > 800.0 || fabs(real'($signed(rd2)) - eq) > 800.0) begin
        failures++;
        $display("readout %0d got %0d %0d exp %f %f", n, $signed(rd), $signed(rd2), ei, eq);
      end
    end
    checks++;
    if (n_late != 0 || n_pts != SHOTS * NPULSE * 8) begin
      failures++; $display("late %0d drive points %0d", n_late, n_pts);
    end
    $display("pulses per shot %0d, drive points %0d, readout %f %f", NPULSE, n_pts, ei, eq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
