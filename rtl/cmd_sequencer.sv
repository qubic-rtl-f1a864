// cmd_sequencer -- clock timer and command dispatch.
//
// The clock timer counts DSP clocks from the start of a sequence. The
// sequencer reads the commands from the command buffer in address order
// (0 .. ncmd-1) and hands each one out on cmd/cmd_valid in the first clock in
// which timer >= trig_t. At most one command leaves per clock, so commands that
// share a trigger time go out on consecutive clocks; such a late issue is
// flagged on `late`. Commands are expected in non-decreasing trig_t order.
//
// When the timer reaches period-1 the sequence ends: if no stop was requested
// and no acc buffer is full, the timer and the command pointer restart and the
// whole sequence repeats (one "shot"); otherwise the sequencer goes idle.
// Checking at the period boundary keeps a repetition from being cut short.
// Commands not yet issued when the period ends are discarded.
//
// A command with its condition bit set is the conditional (fast reset) gate:
// it is issued only if cond_ok is high in its issue clock and is otherwise
// dropped (flagged on `dropped`). What decides cond_ok (the qubit-state
// classification) lies outside this block.
//
// Repetition until the acc buffer is full and the conditional flag follow the
// published design; the issue rule, the stall behaviour and the boundary stop
// are this design's choices.
//
// Timing: the command buffer has one clock of read latency and a one-entry
// prefetch, so the first command of a period can leave at timer = 2 at the
// earliest; cmd_valid is registered, one clock after the issue decision.
// seq_start is high in the clock in which timer = 0 while running.
module cmd_sequencer
  import qubic_pkg::*;
#(
  parameter int DEPTH = 65536,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic              stop,
  input  logic [TRIG_W-1:0] period,
  input  logic [AW:0]       ncmd,
  input  logic              acc_full,
  input  logic              cond_ok,
  output logic              mem_re,
  output logic [AW-1:0]     mem_raddr,
  input  logic [CMD_W-1:0]  mem_rdata,
  output logic              cmd_valid,
  output cmd_t              cmd,
  output logic [TRIG_W-1:0] timer,
  output logic              seq_start,
  output logic              running,
  output logic              late,
  output logic              dropped,
  output logic [31:0]       shots
);
  logic [AW:0] ptr;
  logic        mem_v;     // mem_rdata holds a fetched command
  logic        cur_v;     // cur holds the next command to issue
  cmd_t        cur;
  logic        stop_req;

  logic wrap, load_cur, issue;
  assign wrap     = running && (timer == period - 1'b1);
  assign issue    = running && !wrap && cur_v && (timer >= cur.trig_t);
  assign load_cur = mem_v && (!cur_v || issue);
  assign mem_re   = running && !wrap && (ptr < ncmd) && (!mem_v || load_cur);
  assign mem_raddr = ptr[AW-1:0];
  assign seq_start = running && (timer == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0; timer <= '0; ptr <= '0; mem_v <= 1'b0; cur_v <= 1'b0;
      cur <= '0; stop_req <= 1'b0; shots <= '0;
      cmd_valid <= 1'b0; cmd <= '0; late <= 1'b0; dropped <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      late      <= 1'b0;
      dropped   <= 1'b0;
      if (stop && running) stop_req <= 1'b1;
      if (!running) begin
        if (start) begin
          running <= 1'b1; timer <= '0; ptr <= '0; mem_v <= 1'b0; cur_v <= 1'b0;
          stop_req <= 1'b0; shots <= '0;
        end
      end else if (wrap) begin
        shots <= shots + 1'b1;
        timer <= '0; ptr <= '0; mem_v <= 1'b0; cur_v <= 1'b0;
        if (stop_req || stop || acc_full) running <= 1'b0;
      end else begin
        timer <= timer + 1'b1;
        if (issue) begin
          if (cur.cond && !cond_ok) dropped <= 1'b1;
          else begin
            cmd_valid <= 1'b1;
            cmd       <= cur;
            late      <= (timer != cur.trig_t);
          end
        end
        if (load_cur) cur <= cmd_t'(mem_rdata);
        cur_v <= load_cur ? 1'b1 : (issue ? 1'b0 : cur_v);
        mem_v <= mem_re ? 1'b1 : (load_cur ? 1'b0 : mem_v);
        if (mem_re) ptr <= ptr + 1'b1;
      end
    end
  end

  // a command leaves only while running, and never before its trigger time
  a_issue_running: assert property (@(posedge clk) disable iff (rst) cmd_valid |-> running);
  a_not_early: assert property (@(posedge clk) disable iff (rst) cmd_valid |-> timer > cmd.trig_t);
endmodule
