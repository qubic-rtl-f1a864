// rb2q_workload_tb -- a two-qubit randomized-benchmarking style sequence on the
// gateware, with 2048 shots taken as two batches of 1024. The acc buffer depth
// is reduced from 2^17 to 1024 entries so that each batch fills the buffers
// and shows the fill / stop / read / clear cycle in a short simulation; at
// the default depth all 2048 shots fit in one run.
//
// Up element 0 drives qubit A on DAC pair 0, up element 1 drives qubit B on
// pair 1, and up element 2 plays a 64 ns cross-resonance pulse on pair 0 at
// qubit B's frequency. 32 two-qubit Cliffords are each played as an X90 on A,
// an X90 on B (random virtual Z in the phase words) and one CR pulse. At the end, element 2
// is reused for qubit B's readout tone and element 3 plays qubit A's tone; both
// are added on DAC pair 3, which is looped back into the ADC pair, and down
// elements 4 and 5 demodulate the two tones from the same ADC pair at their
// own frequencies. The sequence repeats until the acc buffers hold 1024 shots
// and the sequencer stops by itself; the host reads both channels, clears them
// and starts the second batch.
// Checks: every DAC sample of the first shot of each batch against a
// floating-point model (the sum of the tones on pair 3 included); 1024 results
// per channel and batch; every result equal to the first (identical replay) and
// to the model of ADC x conj(DLO) for its own channel; acc count zero after a
// clear; the shot counter; no command issued late.
module rb2q_workload_tb;
  import qubic_pkg::*;
  localparam int NCLIFF = 32;
  localparam int CGAP   = 32;                 // clocks per Clifford
  localparam int T0     = 10;
  localparam int TRO    = T0 + NCLIFF * CGAP + 8;
  localparam int PERIOD = TRO + 140;
  localparam int NBATCH = 2;
  localparam int NSHOT  = 1024;
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

  qubic_top #(.ACC_DEPTH(1024)) dut (.clk, .rst, .hclk, .hrst, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
                 .adc, .dac, .cond_ok, .seq_start, .cmd_late, .cmd_dropped);

  initial begin
    #60ms;
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
  // up to two commands per DAC pair and timer value (-1: none)
  int act [4][2][PERIOD];
  sample_t adc_hist [PERIOD][2][NS];

  function automatic logic [23:0] angle(input cmd_t c, input int t, input int k);
    return c.freq * 24'(4 * t + k) + {c.phase, 10'b0};
  endfunction

  function automatic void pair_model(input int p, input int t, input int k, output real ei, output real eq);
    ei = 0; eq = 0;
    for (int s = 0; s < 2; s++) begin
      int j;
      j = act[p][s][t];
      if (j >= 0) begin
        real ri, rq;
        int i;
        i = t - int'(cmds[j].trig_t) - 22;
        rot(env[int'(cmds[j].element)][int'(cmds[j].start) + i], angle(cmds[j], t - 20, k), ri, rq);
        ei += ri; eq += rq;
      end
    end
  endfunction

  task automatic add_cmd(input int el, input int dest, input int start, input int len,
                         input logic [23:0] freq, input logic [13:0] phase, input int trig);
    cmd_t c;
    c = '0;
    c.element = 8'(el); c.dest = 2'(dest); c.start = 12'(start); c.len = 12'(len);
    c.freq = freq; c.phase = phase; c.trig_t = 24'(trig);
    if (el < 4)
      for (int i = 0; i < len; i++)
        if (act[dest][0][trig + 22 + i] < 0) act[dest][0][trig + 22 + i] = cmds.size();
        else act[dest][1][trig + 22 + i] = cmds.size();
    cmds.push_back(c);
  endtask

  int t = -1, shot = -1, batch = 0, n_late = 0;
  always @(posedge clk) begin
    adc[0] <= dac[6];
    adc[1] <= dac[7];
  end
  always @(negedge clk) if (!rst) begin
    if (seq_start) begin t = 0; shot++; end
    else if (t >= 0) t++;
    if (cmd_late) n_late++;
    if (t >= 0 && t < PERIOD && shot == 0) begin
      for (int p = 0; p < 4; p++)
        for (int k = 0; k < NS; k++) begin
          real ei, eq;
          pair_model(p, t, k, ei, eq);
          checks++;
          if (fabs(real'(dac[2*p][k]) - ei) > 5.0 || fabs(real'(dac[2*p+1][k]) - eq) > 5.0) begin
            failures++;
            if (failures < 10) $display("batch %0d t %0d pair %0d k %0d got %0d,%0d exp %f,%f", batch, t, p, k, dac[2*p][k], dac[2*p+1][k], ei, eq);
          end
        end
      if (batch == 0) adc_hist[t] = adc;
    end
  end

  real exp_i [2], exp_q [2];
  logic [31:0] first_i [2], first_q [2];

  initial begin
    logic [31:0] rd, rd2;
    logic [13:0] vza, vzb;
    for (int a = 0; a < 2; a++) for (int k = 0; k < NS; k++) adc[a][k] = 0;
    for (int e = 0; e < 8; e++) for (int a = 0; a < 1024; a++) env[e][a] = 0;
    for (int p = 0; p < 4; p++) for (int s = 0; s < 2; s++) for (int tt = 0; tt < PERIOD; tt++) act[p][s][tt] = -1;
    for (int i = 0; i < 8; i++) begin         // 32 ns Gaussian X90, with a small DRAG quadrature
      real x, g;
      x = (real'(i) - 3.5) / 2.0;
      g = $exp(-x * x / 2.0);
      env[0][i] = {16'(int'(0.45 * 32767.0 * g)), 16'(int'(-0.05 * 32767.0 * x * g))};
      env[1][i] = env[0][i];
    end
    for (int i = 0; i < 16; i++) begin        // flat-top CR pulse at address 0 ...
      real r;
      r = (i < 3) ? real'(i + 1) / 4.0 : (i > 12) ? real'(16 - i) / 4.0 : 1.0;
      env[2][i] = {16'(int'(0.6 * 32767.0 * r)), 16'd0};
    end
    for (int i = 0; i < 64; i++) env[2][256 + i] = {16'sd8000, 16'sd0};  // ... readout tone at 256
    for (int i = 0; i < 64; i++) env[3][i] = {16'sd8000, 16'sd0};
    for (int i = 0; i < 64; i++) env[4][i] = {16'sd16384, 16'sd0};
    for (int i = 0; i < 64; i++) env[5][i] = {16'sd16384, 16'sd0};

    vza = 0; vzb = 0;
    for (int c = 0; c < NCLIFF; c++) begin
      int tc;
      tc = T0 + c * CGAP;
      vza = vza + {2'($urandom), 12'd0};
      vzb = vzb + {2'($urandom), 12'd0};
      add_cmd(0, 0, 0, 8, 24'h0ccccd, vza, tc);
      add_cmd(1, 1, 0, 8, 24'h11eb85, vzb, tc + 1);
      add_cmd(2, 0, 0, 16, 24'h11eb85, vza, tc + 10);
    end
    add_cmd(3, 3, 0, 64, 24'h1999a0, 14'h0000, TRO);       // readout tone A
    add_cmd(2, 3, 256, 64, 24'h266666, 14'h0000, TRO + 1); // readout tone B, element 2 reused
    add_cmd(4, 0, 0, 64, 24'h1999a0, 14'h0000, TRO + 2);   // demodulate A
    add_cmd(5, 0, 0, 64, 24'h266666, 14'h0000, TRO + 3);   // demodulate B

    repeat (4) @(negedge hclk);
    hrst = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 8; e++)
      for (int a = 0; a < 1024; a++)
        if (env[e][a] != 0) hwrite({4'd2, 8'(e), 10'd0, 10'(a)}, env[e][a]);
    foreach (cmds[q])
      for (int w = 0; w < 4; w++) hwrite({4'd1, 10'd0, 16'(q), 2'(w)}, cmds[q][32*w +: 32]);
    hwrite(32'h0000_0001, PERIOD);
    hwrite(32'h0000_0002, cmds.size());

    for (batch = 0; batch < NBATCH; batch++) begin
      shot = -1;
      hwrite(32'h0000_0000, 32'b1);             // start
      do begin
        repeat (2000) @(negedge hclk);
        hread(32'h0000_0004, rd);
      end while (rd[0]);
      checks++;
      if (rd[1] !== 1'b1) begin failures++; $display("batch %0d: acc not full at stop", batch); end
      hread(32'h0000_0005, rd);
      checks++;
      if (rd != NSHOT) begin failures++; $display("batch %0d: shots %0d", batch, rd); end
      if (batch == 0)
        for (int ch = 0; ch < 2; ch++) begin
          int j;
          j = NCLIFF * 3 + 2 + ch;
          exp_i[ch] = 0; exp_q[ch] = 0;
          for (int i = 0; i < 64; i++) begin
            int ta;
            ta = int'(cmds[j].trig_t) + 1 + 20 + i;
            for (int k = 0; k < NS; k++) begin
              real di, dq, ai, aq;
              rot(env[4 + ch][i], angle(cmds[j], ta - 19, k), di, dq);
              ai = real'(adc_hist[ta][0][k]);
              aq = real'(adc_hist[ta][1][k]);
              exp_i[ch] += $floor((ai * di + aq * dq) / 32768.0);
              exp_q[ch] += $floor((aq * di - ai * dq) / 32768.0);
            end
          end
        end
      for (int ch = 0; ch < 2; ch++) begin
        hread(32'h0000_0010 + 32'(ch), rd);
        checks++;
        if (rd != NSHOT) begin failures++; $display("batch %0d ch %0d count %0d", batch, ch, rd); end
        for (int n = 0; n < NSHOT; n++) begin
          hread({4'd3, 8'(ch), 9'd0, 10'(n), 1'b0}, rd);
          hread({4'd3, 8'(ch), 9'd0, 10'(n), 1'b1}, rd2);
          if (batch == 0 && n == 0) begin first_i[ch] = rd; first_q[ch] = rd2; end
          checks++;
          if (rd != first_i[ch] || rd2 != first_q[ch] ||
              fabs(real'($signed(rd)) - exp_i[ch]) > 800.0 || fabs(real'($signed(rd2)) - exp_q[ch]) > 800.0) begin
            failures++;
            if (failures < 20) $display("batch %0d ch %0d shot %0d got %0d %0d exp %f %f", batch, ch, n, $signed(rd), $signed(rd2), exp_i[ch], exp_q[ch]);
          end
        end
      end
      hwrite(32'h0000_0000, 32'b100);           // clear the acc buffers
      repeat (20) @(negedge hclk);
      hread(32'h0000_0010, rd);
      hread(32'h0000_0011, rd2);
      checks++;
      if (rd != 0 || rd2 != 0) begin failures++; $display("counts after clear %0d %0d", rd, rd2); end
    end
    checks++;
    if (n_late != 0) begin failures++; $display("late %0d", n_late); end
    $display("results: A %f %f, B %f %f", exp_i[0], exp_q[0], exp_i[1], exp_q[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
