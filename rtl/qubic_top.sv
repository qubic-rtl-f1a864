// qubic_top -- gateware DSP of the qubit controller, with its host interface.
//
// The host loads a list of 128-bit pulse commands into the command buffer and
// complex envelopes into the processing elements. The clock timer and
// sequencer then replay the command list every `period` DSP clocks, handing
// each command, at its trigger time, to the element it names:
//
//   elements 0 .. M-1      up conversion: envelope x carrier -> IF I/Q, routed
//                          by the command's destination through the M-to-N
//                          switch to a DAC pair (DAC 2d = I, DAC 2d+1 = Q);
//   elements M .. M+K-1    down conversion: envelope x carrier = DLO; the ADC
//                          pair times conj(DLO) is integrated by the element's
//                          vector accumulator into its acc buffer.
//
// The sequence repeats until some acc buffer is full. Two acquisition
// buffers capture any ADC, DLO or DAC stream from the start of a sequence.
// The block structure (command buffer, clock timer, M up and K down processing
// elements with their own envelope buffers, M-to-N switch, K accumulators and
// acc buffers, selector and L acq buffers) follows the published block diagram;
// M, K and L, the buffer depths not given there, and all timing are this
// design's choice.
//
// Interface: DSP clock clk (250 MHz) with reset rst, host clock hclk with reset
// hrst, a 32-bit host word bus (map in host_interface), ADC and DAC streams of
// NS = 4 samples per clock, and cond_ok, the qubit-state result that enables
// conditional (fast reset) commands. seq_start marks the first clock of every
// repetition (a trigger for other modules); cmd_late and cmd_dropped flag a
// command issued after its trigger time and a conditional command skipped.
//
// Timing: a command issued in clock c (cmd_valid) reaches the DAC pins in clock
// c + 21 (element 20 clocks + switch 1 clock).
module qubic_top
  import qubic_pkg::*;
#(
  parameter int M         = 4,
  parameter int K         = 4,
  parameter int NDEST     = 4,
  parameter int L         = 2,
  parameter int CMD_DEPTH = 65536,
  parameter int ENV_DEPTH = 1024,
  parameter int ACC_DEPTH = 131072,
  parameter int ACQ_DEPTH = 1024,
  localparam int NSRC     = 2 + 2*K + 2*NDEST
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        hclk,
  input  logic        hrst,
  input  logic        h_we,
  input  logic        h_re,
  input  logic [31:0] h_addr,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  output logic        h_rvalid,
  input  sample_t     adc [2][NS],
  output sample_t     dac [2*NDEST][NS],
  input  logic        cond_ok,
  output logic        seq_start,
  output logic        cmd_late,
  output logic        cmd_dropped
);
  localparam int CAW = $clog2(CMD_DEPTH);
  localparam int EAW = $clog2(ENV_DEPTH);
  localparam int AAW = $clog2(ACC_DEPTH);
  localparam int QAW = $clog2(ACQ_DEPTH);
  localparam int NE  = M + K;

  // ---- host interface --------------------------------------------------------
  logic              cmd_we;
  logic [CAW-1:0]    cmd_waddr;
  logic [CMD_W-1:0]  cmd_wdata;
  logic [NE-1:0]     env_we;
  logic [EAW-1:0]    env_waddr;
  logic [31:0]       env_wdata;
  logic [AAW-1:0]    acc_raddr;
  logic [63:0]       acc_rdata [K];
  logic [QAW-1:0]    acq_raddr;
  logic [63:0]       acq_rdata [L];
  logic              start, stop, acc_clear;
  logic [L-1:0]      acq_arm, acq_done;
  logic [TRIG_W-1:0] period;
  logic [CAW:0]      ncmd;
  logic [7:0]        acq_sel [L];
  logic              running, acc_full;
  logic [31:0]       shots;
  logic [AAW:0]      acc_count [K];
  logic [K-1:0]      acc_full_k;

  host_interface #(.M(M), .K(K), .L(L), .CMD_DEPTH(CMD_DEPTH), .ENV_DEPTH(ENV_DEPTH),
                   .ACC_DEPTH(ACC_DEPTH), .ACQ_DEPTH(ACQ_DEPTH)) u_hoi (
    .hclk, .hrst, .h_we, .h_re, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .cmd_we, .cmd_waddr, .cmd_wdata, .env_we, .env_waddr, .env_wdata,
    .acc_raddr, .acc_rdata, .acq_raddr, .acq_rdata,
    .clk, .rst, .start, .stop, .acc_clear, .acq_arm, .period, .ncmd, .acq_sel,
    .running, .shots, .acc_count, .acc_full, .acq_done
  );

  // ---- command buffer and sequencer ------------------------------------------
  logic              mem_re;
  logic [CAW-1:0]    mem_raddr;
  logic [CMD_W-1:0]  mem_rdata;
  logic              cmd_valid;
  cmd_t              cmd;
  logic [TRIG_W-1:0] timer;

  cmd_buffer #(.DEPTH(CMD_DEPTH), .WIDTH(CMD_W)) u_cmdbuf (
    .hclk, .we(cmd_we), .waddr(cmd_waddr), .wdata(cmd_wdata),
    .clk, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata)
  );

  assign acc_full = |acc_full_k;

  cmd_sequencer #(.DEPTH(CMD_DEPTH)) u_seq (
    .clk, .rst, .start, .stop, .period, .ncmd, .acc_full, .cond_ok,
    .mem_re, .mem_raddr, .mem_rdata, .cmd_valid, .cmd, .timer, .seq_start,
    .running, .late(cmd_late), .dropped(cmd_dropped), .shots
  );

  // ---- processing elements ---------------------------------------------------
  sample_t                up_i [M][NS], up_q [M][NS];
  logic [M-1:0]           up_act;
  logic [DEST_W-1:0]      up_dest [M];
  sample_t                dlo_i [K][NS], dlo_q [K][NS];
  logic signed [BB_W-1:0] bb_i [K][NS], bb_q [K][NS];
  logic [K-1:0]           bb_act, bb_last;

  for (genvar m = 0; m < M; m++) begin : g_up
    logic signed [BB_W-1:0] nb_i [NS], nb_q [NS];
    logic nb_act, nb_last, n_last;
    proc_element #(.DOWN(1'b0), .ENV_DEPTH(ENV_DEPTH)) u_pe (
      .clk, .rst, .hclk, .env_we(env_we[m]), .env_waddr, .env_wdata,
      .cmd_valid(cmd_valid && (int'(cmd.element) == m)), .cmd, .timer,
      .adc_i(adc[0]), .adc_q(adc[1]),
      .out_i(up_i[m]), .out_q(up_q[m]), .out_active(up_act[m]), .out_last(n_last),
      .out_dest(up_dest[m]), .bb_i(nb_i), .bb_q(nb_q), .bb_active(nb_act), .bb_last(nb_last)
    );
  end

  for (genvar k = 0; k < K; k++) begin : g_down
    logic [DEST_W-1:0] n_dest;
    logic n_act, n_last;
    logic              res_valid;
    logic signed [31:0] res_i, res_q;
    proc_element #(.DOWN(1'b1), .ENV_DEPTH(ENV_DEPTH)) u_pe (
      .clk, .rst, .hclk, .env_we(env_we[M+k]), .env_waddr, .env_wdata,
      .cmd_valid(cmd_valid && (int'(cmd.element) == M + k)), .cmd, .timer,
      .adc_i(adc[0]), .adc_q(adc[1]),
      .out_i(dlo_i[k]), .out_q(dlo_q[k]), .out_active(n_act), .out_last(n_last),
      .out_dest(n_dest), .bb_i(bb_i[k]), .bb_q(bb_q[k]), .bb_active(bb_act[k]), .bb_last(bb_last[k])
    );
    vec_accumulator #(.ACC_W(32)) u_acc (
      .clk, .rst, .in_active(bb_act[k]), .in_last(bb_last[k]), .bb_i(bb_i[k]), .bb_q(bb_q[k]),
      .res_valid, .res_i, .res_q
    );
    acc_buffer #(.DEPTH(ACC_DEPTH), .ACC_W(32)) u_accbuf (
      .clk, .rst, .clear(acc_clear), .wr(res_valid), .wi(res_i), .wq(res_q),
      .count(acc_count[k]), .full(acc_full_k[k]), .hclk, .raddr(acc_raddr), .rdata(acc_rdata[k])
    );
  end

  // ---- M-to-N switch ---------------------------------------------------------
  dac_switch #(.M(M), .NDEST(NDEST)) u_switch (
    .clk, .in_i(up_i), .in_q(up_q), .in_active(up_act), .in_dest(up_dest), .dac
  );

  // ---- acquisition -----------------------------------------------------------
  sample_t src [NSRC][NS];
  sample_t acq_in [L][NS];
  always_comb begin
    src[0] = adc[0];
    src[1] = adc[1];
    for (int k = 0; k < K; k++) begin
      src[2 + 2*k]     = dlo_i[k];
      src[2 + 2*k + 1] = dlo_q[k];
    end
    for (int n = 0; n < 2*NDEST; n++) src[2 + 2*K + n] = dac[n];
  end

  acq_selector #(.NSRC(NSRC), .L(L)) u_sel (.clk, .src, .sel(acq_sel), .out(acq_in));

  for (genvar l = 0; l < L; l++) begin : g_acq
    acq_buffer #(.DEPTH(ACQ_DEPTH)) u_acq (
      .clk, .rst, .arm(acq_arm[l]), .trig(seq_start), .din(acq_in[l]), .done(acq_done[l]),
      .hclk, .raddr(acq_raddr), .rdata(acq_rdata[l])
    );
  end
endmodule
