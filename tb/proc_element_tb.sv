// proc_element_tb -- checks an up and a down processing element.
//
// Random envelopes are written through the host port. Pulses with random
// start, length, frequency and phase are issued; every output point is compared
// with a floating-point model: env(start+i) * exp(j*2*pi*angle(k)/2^24) with
// angle(k) = freq*(4*T + k) + phase*2^10, T being the timer value in the clock
// the point is read. The first point must appear exactly 20 clocks after the
// command and the pulse must last len clocks. The down element is fed random
// ADC samples and its baseband output is checked against adc * conj(DLO) / 2^15.
// A second command issued mid-pulse must replace the running pulse.
module proc_element_tb;
  import qubic_pkg::*;
  localparam int LAT = 20;
  logic clk = 0, hclk = 0, rst = 1;
  always #2 clk = ~clk;
  always #5 hclk = ~hclk;
  int checks = 0, failures = 0;

  logic        env_we;
  logic [9:0]  env_waddr;
  logic [31:0] env_wdata;
  logic        cmd_valid;
  cmd_t        cmd;
  logic [23:0] timer = 24'h123456;
  sample_t adc_i [NS], adc_q [NS];
  sample_t uo_i [NS], uo_q [NS], do_i [NS], do_q [NS];
  logic signed [BB_W-1:0] ub_i [NS], ub_q [NS], db_i [NS], db_q [NS];
  logic u_act, u_last, d_act, d_last, ub_act, ub_last, db_act, db_last;
  logic [1:0] u_dest, d_dest;
  logic [31:0] envmem [1024];

  proc_element #(.DOWN(1'b0)) dut_up (.clk, .rst, .hclk, .env_we, .env_waddr, .env_wdata,
    .cmd_valid, .cmd, .timer, .adc_i, .adc_q, .out_i(uo_i), .out_q(uo_q), .out_active(u_act),
    .out_last(u_last), .out_dest(u_dest), .bb_i(ub_i), .bb_q(ub_q), .bb_active(ub_act), .bb_last(ub_last));
  proc_element #(.DOWN(1'b1)) dut_dn (.clk, .rst, .hclk, .env_we, .env_waddr, .env_wdata,
    .cmd_valid, .cmd, .timer, .adc_i, .adc_q, .out_i(do_i), .out_q(do_q), .out_active(d_act),
    .out_last(d_last), .out_dest(d_dest), .bb_i(db_i), .bb_q(db_q), .bb_active(db_act), .bb_last(db_last));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // free-running timer and a per-cycle log of what the model expects
  int cyc = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    timer <= timer + 1;
  end

  // expected outputs by cycle
  bit  exp_v   [int];
  bit  exp_l   [int];
  real exp_i   [int][NS];
  real exp_q   [int][NS];

  function automatic void rot(input logic [31:0] e, input logic [23:0] a, output real ri, output real rq);
    real th, x, y;
    th = 2.0 * 3.14159265358979 * real'(a) / 16777216.0;
    x = real'($signed(e[31:16]));
    y = real'($signed(e[15:0]));
    ri = x * $cos(th) - y * $sin(th);
    rq = x * $sin(th) + y * $cos(th);
  endfunction

  task automatic issue(input int start, input int len, input logic [23:0] freq, input logic [13:0] phase, input int dest);
    int c0;
    @(negedge clk);
    cmd = '0;
    cmd.start = 12'(start); cmd.len = 12'(len); cmd.freq = 24'(freq);
    cmd.phase = 14'(phase); cmd.dest = 2'(dest);
    cmd_valid = 1;
    c0 = cyc;
    for (int i = 0; i < len; i++) begin
      logic [23:0] t, a;
      int oc;
      // point i is read in clock c0+1+i; timer then equals timer(c0) + 1 + i
      t = timer + 24'(1 + i);
      oc = c0 + LAT + i;
      exp_v[oc] = 1;
      exp_l[oc] = (i == len - 1);
      for (int k = 0; k < NS; k++) begin
        a = 24'(freq) * (t * 4 + 24'(k)) + {14'(phase), 10'b0};
        rot(envmem[(start + i) % 1024], a, exp_i[oc][k], exp_q[oc][k]);
      end
    end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // compare every clock
  real pdi [NS], pdq [NS];
  bit  pv = 0, pl = 0;
  int  n_up_pts = 0;
  always @(negedge clk) if (!rst) begin
    bit ev, el;
    ev = exp_v.exists(cyc) ? exp_v[cyc] : 1'b0;
    el = exp_l.exists(cyc) ? exp_l[cyc] : 1'b0;
    checks++;
    if (u_act !== ev || d_act !== ev || u_last !== el) begin
      failures++;
      if (failures < 10) $display("cyc %0d active %0d/%0d exp %0d last %0d exp %0d", cyc, u_act, d_act, ev, u_last, el);
    end
    if (ev) begin
      n_up_pts++;
      for (int k = 0; k < NS; k++) begin
        real di, dq;
        checks++;
        di = real'(uo_i[k]) - exp_i[cyc][k];
        dq = real'(uo_q[k]) - exp_q[cyc][k];
        if (di > 3.0 || di < -3.0 || dq > 3.0 || dq < -3.0 ||
            uo_i[k] != do_i[k] || uo_q[k] != do_q[k]) begin
          failures++;
          if (failures < 10) $display("cyc %0d k %0d got %0d,%0d exp %f,%f", cyc, k, uo_i[k], uo_q[k], exp_i[cyc][k], exp_q[cyc][k]);
        end
      end
    end
    // baseband of the previous clock's DLO and ADC samples
    checks++;
    if (db_act !== pv || db_last !== pl) failures++;
    if (pv) begin
      for (int k = 0; k < NS; k++) begin
        real ei, eq, di, dq;
        ei = (real'(adc_prev_i[k]) * pdi[k] + real'(adc_prev_q[k]) * pdq[k]) / 32768.0;
        eq = (real'(adc_prev_q[k]) * pdi[k] - real'(adc_prev_i[k]) * pdq[k]) / 32768.0;
        di = real'(db_i[k]) - ei;
        dq = real'(db_q[k]) - eq;
        checks++;
        if (di > 2.0 || di < -2.0 || dq > 2.0 || dq < -2.0) begin
          failures++;
          if (failures < 10) $display("bb cyc %0d k %0d got %0d,%0d exp %f,%f", cyc, k, db_i[k], db_q[k], ei, eq);
        end
      end
    end
    pv = ev; pl = el;
    for (int k = 0; k < NS; k++) begin
      pdi[k] = real'(do_i[k]);
      pdq[k] = real'(do_q[k]);
    end
  end

  // ADC stimulus: new random samples each clock, remembered for one clock
  sample_t adc_prev_i [NS], adc_prev_q [NS];
  always @(posedge clk) begin
    for (int k = 0; k < NS; k++) begin
      adc_prev_i[k] <= adc_i[k];
      adc_prev_q[k] <= adc_q[k];
      adc_i[k] <= sample_t'($urandom);
      adc_q[k] <= sample_t'($urandom);
    end
  end

  initial begin
    cmd_valid = 0; cmd = '0; env_we = 0; env_waddr = 0; env_wdata = 0; 
    for (int k = 0; k < NS; k++) begin adc_i[k] = 0; adc_q[k] = 0; end
    for (int a = 0; a < 1024; a++) begin
      @(negedge hclk);
      envmem[a] = {16'(int'($urandom_range(0, 40000)) - 20000), 16'(int'($urandom_range(0, 40000)) - 20000)};
      env_we = 1; env_waddr = 10'(a); env_wdata = envmem[a];
    end
    @(negedge hclk) env_we = 0;
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    issue(0, 24, 24'h0ccccc, 14'h1000, 1);     // 96 ns pulse
    repeat (40) @(negedge clk);
    issue(1020, 10, 24'h123457, 14'h3fff, 2);  // wraps around the buffer end
    repeat (40) @(negedge clk);
    for (int p = 0; p < 10; p++) begin
      issue($urandom_range(0, 4095), $urandom_range(1, 60), 24'($urandom), 14'($urandom), $urandom_range(0, 3));
      repeat ($urandom_range(70, 90)) @(negedge clk);
    end
    // back to back: the second command replaces the first mid-pulse
    begin
      int c0;
      issue(100, 30, 24'h200000, 0, 0);
      repeat (8) @(negedge clk);
      c0 = cyc;
      // drop the rest of the first pulse from the model
      for (int c = c0 + 1 + LAT; c < c0 + LAT + 40; c++) begin exp_v.delete(c); exp_l.delete(c); end
      issue(300, 12, 24'h050000, 0, 3);
      // the last point of the cut pulse is not marked "last"
    end
    repeat (60) @(negedge clk);
    issue(5, 0, 24'h100000, 0, 0);            // zero length: nothing
    repeat (40) @(negedge clk);
    if (n_up_pts < 200) failures++;
    $display("points checked %0d", n_up_pts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
