// proc_element -- processing element: one pulse at a time through a phase rotator.
//
// A command addressed to this element names an envelope segment (start, len),
// a carrier frequency and an initial phase. The element then reads one complex
// envelope point per DSP clock from its own envelope buffer, starting at
// start (taken modulo the buffer depth), for len clocks, and rotates it by the
// carrier angle of each of the NS converter samples of that clock:
//
//   angle(k) = freq * (NS*timer + k) + phase * 2^10   (mod 2^24),  k = 0..NS-1
//
// so the carrier advances by freq every 1 ns sample and stays coherent with the
// sequence clock timer; the 14-bit phase word is scaled to the 24-bit circle.
// The rotation is done by NS CORDIC rotators in parallel. Each envelope point is
// held for the NS samples of its clock. A new command for a busy element
// replaces the running pulse.
//
// DOWN = 0 (up conversion): out_i/out_q is the IF pulse, eq. (1) of the
// published design, sent to the DAC switch with out_dest. It has no ADC path,
// so its bb_* outputs are constant zero; they exist so that both variants
// share one port list.
// DOWN = 1 (down conversion): out_i/out_q is the digital local oscillator (DLO),
// and the ADC I/Q samples are multiplied by its complex conjugate,
// bb = adc * conj(DLO) / 2^15, giving baseband samples for the accumulator
// (eq. (2) when the envelope is flat; a shaped envelope weights the window).
// What the down element's envelope holds is this design's reading of the block
// diagram, which gives the down element an envelope buffer and freq/phase.
//
// Timing: with cmd_valid high in clock c, the first point appears on out_* in
// clock c + OUT_LAT (OUT_LAT = ITER + 4 = 20) and on bb_* one clock later.
// out_active marks clocks that carry a point, out_last the last one.
module proc_element
  import qubic_pkg::*;
#(
  parameter bit DOWN      = 1'b0,
  parameter int ENV_DEPTH = 1024,
  parameter int ITER      = 16,
  localparam int EAW      = $clog2(ENV_DEPTH)
) (
  input  logic            clk,
  input  logic            rst,
  // envelope buffer host port
  input  logic            hclk,
  input  logic            env_we,
  input  logic [EAW-1:0]  env_waddr,
  input  logic [31:0]     env_wdata,
  // command for this element
  input  logic            cmd_valid,
  input  cmd_t            cmd,
  input  logic [TRIG_W-1:0] timer,
  // ADC pair (down conversion only)
  input  sample_t         adc_i [NS],
  input  sample_t         adc_q [NS],
  // IF output (up) or DLO (down)
  output sample_t         out_i [NS],
  output sample_t         out_q [NS],
  output logic            out_active,
  output logic            out_last,
  output logic [DEST_W-1:0] out_dest,
  // baseband output (down)
  output logic signed [BB_W-1:0] bb_i [NS],
  output logic signed [BB_W-1:0] bb_q [NS],
  output logic            bb_active,
  output logic            bb_last
);
  localparam int CLAT = ITER + 2;   // CORDIC latency

  // ---- pulse control -------------------------------------------------------
  logic              act;
  logic [EAW-1:0]    addr;
  logic [LEN_W-1:0]  rem;
  logic [FREQ_W-1:0] fr;
  logic [PHASE_W-1:0] ph;
  logic [DEST_W-1:0] dst;

  always_ff @(posedge clk) begin
    if (rst) begin
      act <= 1'b0;
      addr <= '0; rem <= '0; fr <= '0; ph <= '0; dst <= '0;
    end else if (cmd_valid) begin
      act  <= (cmd.len != '0);
      addr <= EAW'(cmd.start);
      rem  <= cmd.len;
      fr   <= cmd.freq;
      ph   <= cmd.phase;
      dst  <= cmd.dest;
    end else if (act) begin
      addr <= addr + 1'b1;
      rem  <= rem - 1'b1;
      if (rem == LEN_W'(1)) act <= 1'b0;
    end
  end

  // ---- stage A -> B: envelope read and carrier angle -------------------------
  logic [31:0]        env_q;
  logic [ANG_W-1:0]   ang [NS];
  logic               b_v, b_last;
  logic [DEST_W-1:0]  b_dest;

  env_buffer #(.DEPTH(ENV_DEPTH), .WIDTH(32)) u_env (
    .hclk, .we(env_we), .waddr(env_waddr), .wdata(env_wdata),
    .clk, .raddr(addr), .rdata(env_q)
  );

  always_ff @(posedge clk) begin
    logic [ANG_W-1:0] base;
    base = ANG_W'(fr * ANG_W'(timer * NS)) + ANG_W'({ph, {(ANG_W-PHASE_W){1'b0}}});
    for (int k = 0; k < NS; k++) ang[k] <= base + ANG_W'(fr * k);
    if (rst) begin
      b_v <= 1'b0; b_last <= 1'b0; b_dest <= '0;
    end else begin
      b_v    <= act;
      b_last <= act && (rem == LEN_W'(1));
      b_dest <= dst;
    end
  end

  // ---- rotation ------------------------------------------------------------
  sample_t rot_i [NS];
  sample_t rot_q [NS];
  for (genvar k = 0; k < NS; k++) begin : g_rot
    cordic_rot #(.ITER(ITER), .IW(SAMPLE_W), .AW(ANG_W)) u_cordic (
      .clk, .xi(env_q[31:16]), .yi(env_q[15:0]), .ang(ang[k]),
      .xo(rot_i[k]), .yo(rot_q[k])
    );
  end

  // control delayed to match the CORDIC
  logic [CLAT-1:0] v_sr, l_sr;
  logic [DEST_W-1:0] d_sr [CLAT];
  always_ff @(posedge clk) begin
    if (rst) begin
      v_sr <= '0; l_sr <= '0;
    end else begin
      v_sr <= {v_sr[CLAT-2:0], b_v};
      l_sr <= {l_sr[CLAT-2:0], b_last};
    end
    d_sr[0] <= b_dest;
    for (int j = 1; j < CLAT; j++) d_sr[j] <= d_sr[j-1];
  end

  assign out_active = v_sr[CLAT-1];
  assign out_last   = l_sr[CLAT-1];
  assign out_dest   = d_sr[CLAT-1];
  always_comb
    for (int k = 0; k < NS; k++) begin
      out_i[k] = out_active ? rot_i[k] : '0;
      out_q[k] = out_active ? rot_q[k] : '0;
    end

  // ---- down conversion mixer -------------------------------------------------
  if (DOWN) begin : g_down
    always_ff @(posedge clk) begin
      for (int k = 0; k < NS; k++) begin
        logic signed [33:0] re, im;
        re = 34'(adc_i[k] * out_i[k]) + 34'(adc_q[k] * out_q[k]);
        im = 34'(adc_q[k] * out_i[k]) - 34'(adc_i[k] * out_q[k]);
        bb_i[k] <= BB_W'(re >>> 15);
        bb_q[k] <= BB_W'(im >>> 15);
      end
      if (rst) begin
        bb_active <= 1'b0; bb_last <= 1'b0;
      end else begin
        bb_active <= out_active;
        bb_last   <= out_active && out_last;
      end
    end
  end else begin : g_up
    // An up-conversion element has no baseband output.
    always_comb begin
      for (int k = 0; k < NS; k++) begin
        bb_i[k] = '0;
        bb_q[k] = '0;
      end
      bb_active = 1'b0;
      bb_last   = 1'b0;
    end
  end

endmodule
