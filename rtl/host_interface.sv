// host_interface -- register and memory map seen by the host computer.
//
// The host talks to the gateware through a 32-bit word bus on its own clock
// (hclk); the network transport in front of it is not part of this design.
// Address bits [31:28] select a region:
//
//   0  registers, word address a[7:0]:
//        0x00 CTRL    write 1 to: bit0 start, bit1 stop, bit2 clear acc
//                     buffers, bit(3+l) arm acquisition buffer l
//        0x01 PERIOD  sequence period in DSP clocks (24 bits)
//        0x02 NCMD    number of commands in the sequence
//        0x03 ACQSEL  source of acquisition buffer l in bits [8l+7:8l]
//        0x04 STATUS  bit0 running, bit1 some acc buffer full,
//                     bit(8+l) acquisition buffer l done      (read only)
//        0x05 SHOTS   completed repetitions                   (read only)
//        0x10+k       entries in acc buffer k                 (read only)
//   1  command buffer: a[17:2] command index, a[1:0] 32-bit lane (lane 0 =
//      bits 31:0). Lanes 0..2 are staged; writing lane 3 stores the command.
//   2  envelope buffers: a[27:20] element (up elements 0..M-1, then down
//      elements M..M+K-1), a[9:0] point, data {I[15:0], Q[15:0]}
//   3  acc buffers: a[27:20] channel, a[17:1] entry, a[0] 0 = I, 1 = Q
//   4  acq buffers: a[27:20] buffer, a[10:1] entry, a[0] 0 = samples 0,1,
//      1 = samples 2,3
//
// Reads return h_rdata with h_rvalid two hclk cycles after h_re.
// The buffer write ports (addresses, data) are taken straight from the bus
// fields, without a register stage; only the strobes are decoded.
// Buffers are two-clock RAMs written and read straight from hclk; control
// registers go to the DSP clock, and status comes back, through cdc_handshake,
// with start/stop/clear/arm carried as toggles and turned back into one-clock
// pulses on the DSP side. The published design gives the host interface the
// job of crossing clock domains and loading/reading the buffers; the map,
// the bus and the crossing scheme are this design's choice.
module host_interface
  import qubic_pkg::*;
#(
  parameter int M         = 4,
  parameter int K         = 4,
  parameter int L         = 2,
  parameter int CMD_DEPTH = 65536,
  parameter int ENV_DEPTH = 1024,
  parameter int ACC_DEPTH = 131072,
  parameter int ACQ_DEPTH = 1024,
  localparam int CAW = $clog2(CMD_DEPTH),
  localparam int EAW = $clog2(ENV_DEPTH),
  localparam int AAW = $clog2(ACC_DEPTH),
  localparam int QAW = $clog2(ACQ_DEPTH)
) (
  // host side
  input  logic              hclk,
  input  logic              hrst,
  input  logic              h_we,
  input  logic              h_re,
  input  logic [31:0]       h_addr,
  input  logic [31:0]       h_wdata,
  output logic [31:0]       h_rdata,
  output logic              h_rvalid,
  // buffer ports, hclk domain
  output logic              cmd_we,
  output logic [CAW-1:0]    cmd_waddr,
  output logic [CMD_W-1:0]  cmd_wdata,
  output logic [M+K-1:0]    env_we,
  output logic [EAW-1:0]    env_waddr,
  output logic [31:0]       env_wdata,
  output logic [AAW-1:0]    acc_raddr,
  input  logic [63:0]       acc_rdata [K],
  output logic [QAW-1:0]    acq_raddr,
  input  logic [63:0]       acq_rdata [L],
  // DSP side
  input  logic              clk,
  input  logic              rst,
  output logic              start,
  output logic              stop,
  output logic              acc_clear,
  output logic [L-1:0]      acq_arm,
  output logic [TRIG_W-1:0] period,
  output logic [CAW:0]      ncmd,
  output logic [7:0]        acq_sel [L],
  input  logic              running,
  input  logic [31:0]       shots,
  input  logic [AAW:0]      acc_count [K],
  input  logic              acc_full,
  input  logic [L-1:0]      acq_done
);
  // ---- host-side registers ---------------------------------------------------
  typedef struct packed {
    logic [TRIG_W-1:0] period;
    logic [CAW:0]      ncmd;
    logic [8*L-1:0]    acq_sel;
    logic              t_start;
    logic              t_stop;
    logic              t_clear;
    logic [L-1:0]      t_arm;
  } ctrl_t;

  typedef struct packed {
    logic              running;
    logic              acc_full;
    logic [L-1:0]      acq_done;
    logic [31:0]       shots;
    logic [K*(AAW+1)-1:0] acc_count;
  } stat_t;

  ctrl_t h_ctrl, d_ctrl, d_ctrl_q;
  stat_t d_stat, h_stat;
  logic [95:0] lanes;

  wire [3:0] region = h_addr[31:28];
  wire [7:0] sel8   = h_addr[27:20];

  always_ff @(posedge hclk) begin
    if (hrst) begin
      h_ctrl <= '0;
      lanes  <= '0;
    end else if (h_we) begin
      if (region == 4'd0) begin
        unique case (h_addr[7:0])
          8'h00: begin
            h_ctrl.t_start <= h_ctrl.t_start ^ h_wdata[0];
            h_ctrl.t_stop  <= h_ctrl.t_stop  ^ h_wdata[1];
            h_ctrl.t_clear <= h_ctrl.t_clear ^ h_wdata[2];
            h_ctrl.t_arm   <= h_ctrl.t_arm   ^ h_wdata[3 +: L];
          end
          8'h01: h_ctrl.period  <= h_wdata[TRIG_W-1:0];
          8'h02: h_ctrl.ncmd    <= h_wdata[CAW:0];
          8'h03: h_ctrl.acq_sel <= h_wdata[8*L-1:0];
          default: ;
        endcase
      end
      if (region == 4'd1 && h_addr[1:0] != 2'd3) lanes[32*h_addr[1:0] +: 32] <= h_wdata;
    end
  end

  // command buffer: store on lane 3
  assign cmd_we    = h_we && (region == 4'd1) && (h_addr[1:0] == 2'd3);
  assign cmd_waddr = h_addr[2 +: CAW];
  assign cmd_wdata = {h_wdata, lanes};

  // envelope buffers
  always_comb
    for (int e = 0; e < M + K; e++)
      env_we[e] = h_we && (region == 4'd2) && (int'(sel8) == e);
  assign env_waddr = h_addr[EAW-1:0];
  assign env_wdata = h_wdata;

  // acc/acq buffer read addresses come straight from the bus
  assign acc_raddr = h_addr[1 +: AAW];
  assign acq_raddr = h_addr[1 +: QAW];

  // ---- read path: stage 1 (RAM read, address decode), stage 2 (mux) ----------
  logic        r1_v;
  logic [31:0] r1_addr;
  always_ff @(posedge hclk) begin
    if (hrst) begin
      r1_v <= 1'b0; r1_addr <= '0; h_rvalid <= 1'b0; h_rdata <= '0;
    end else begin
      r1_v    <= h_re;
      r1_addr <= h_addr;
      h_rvalid <= r1_v;
      if (r1_v) begin
        logic [3:0] rg;
        logic [7:0] s;
        rg = r1_addr[31:28];
        s  = r1_addr[27:20];
        h_rdata <= '0;
        unique case (rg)
          4'd0: begin
            if (r1_addr[7:0] == 8'h01) h_rdata <= 32'(h_ctrl.period);
            if (r1_addr[7:0] == 8'h02) h_rdata <= 32'(h_ctrl.ncmd);
            if (r1_addr[7:0] == 8'h03) h_rdata <= 32'(h_ctrl.acq_sel);
            if (r1_addr[7:0] == 8'h04) h_rdata <= 32'({h_stat.acq_done, 6'b0, h_stat.acc_full, h_stat.running});
            if (r1_addr[7:0] == 8'h05) h_rdata <= h_stat.shots;
            for (int k = 0; k < K; k++)
              if (r1_addr[7:0] == 8'(8'h10 + k)) h_rdata <= 32'(h_stat.acc_count[k*(AAW+1) +: AAW+1]);
          end
          4'd3: for (int k = 0; k < K; k++)
                  if (int'(s) == k) h_rdata <= r1_addr[0] ? acc_rdata[k][31:0] : acc_rdata[k][63:32];
          4'd4: for (int l = 0; l < L; l++)
                  if (int'(s) == l) h_rdata <= r1_addr[0] ? acq_rdata[l][63:32] : acq_rdata[l][31:0];
          default: ;
        endcase
      end
    end
  end

  // ---- clock-domain crossing -------------------------------------------------
  cdc_handshake #(.W($bits(ctrl_t))) u_ctrl_cdc (
    .src_clk(hclk), .src_rst(hrst), .src_data(h_ctrl),
    .dst_clk(clk),  .dst_rst(rst),  .dst_data(d_ctrl)
  );

  always_comb begin
    d_stat.running  = running;
    d_stat.acc_full = acc_full;
    d_stat.acq_done = acq_done;
    d_stat.shots    = shots;
    for (int k = 0; k < K; k++) d_stat.acc_count[k*(AAW+1) +: AAW+1] = acc_count[k];
  end

  cdc_handshake #(.W($bits(stat_t))) u_stat_cdc (
    .src_clk(clk),  .src_rst(rst),  .src_data(d_stat),
    .dst_clk(hclk), .dst_rst(hrst), .dst_data(h_stat)
  );

  always_ff @(posedge clk) begin
    if (rst) d_ctrl_q <= '0;
    else     d_ctrl_q <= d_ctrl;
  end

  assign start     = d_ctrl.t_start ^ d_ctrl_q.t_start;
  assign stop      = d_ctrl.t_stop  ^ d_ctrl_q.t_stop;
  assign acc_clear = d_ctrl.t_clear ^ d_ctrl_q.t_clear;
  assign acq_arm   = d_ctrl.t_arm   ^ d_ctrl_q.t_arm;
  assign period    = d_ctrl.period;
  assign ncmd      = d_ctrl.ncmd;
  always_comb
    for (int l = 0; l < L; l++) acq_sel[l] = d_ctrl.acq_sel[8*l +: 8];
endmodule
