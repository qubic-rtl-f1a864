// acq_buffer -- acquisition buffer: a one-shot oscilloscope of a raw stream.
//
// After `arm`, the buffer waits for the next sequence start (trig) and then
// stores DEPTH consecutive clocks of its stream, NS samples per entry
// (sample 0 in the low 16 bits), after which `done` is raised until the next
// arm. The host reads the entries on hclk. The published design describes
// these buffers as a live oscilloscope of ADC, DLO and DAC data; the arm and
// trigger scheme and the depth are this design's choice.
//
// Timing: the stream value present in the trig clock is entry 0. The host read
// has one clock of latency.
module acq_buffer
  import qubic_pkg::*;
#(
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   arm,
  input  logic                   trig,
  input  sample_t                din [NS],
  output logic                   done,
  input  logic                   hclk,
  input  logic [AW-1:0]          raddr,
  output logic [NS*SAMPLE_W-1:0] rdata
);
  typedef enum logic [1:0] {IDLE, ARMED, CAPTURE} state_t;
  state_t state;
  logic [AW-1:0] wptr;
  logic [NS*SAMPLE_W-1:0] mem [DEPTH];
  logic [NS*SAMPLE_W-1:0] word;
  logic we;

  always_comb
    for (int k = 0; k < NS; k++) word[k*SAMPLE_W +: SAMPLE_W] = din[k];

  assign we = (state == CAPTURE) || (state == ARMED && trig);

  always_ff @(posedge clk) begin
    if (we) mem[(state == ARMED) ? '0 : wptr] <= word;
    if (rst) begin
      state <= IDLE; wptr <= '0; done <= 1'b0;
    end else if (arm) begin
      state <= ARMED; done <= 1'b0;
    end else begin
      unique case (state)
        IDLE:    ;
        ARMED:   if (trig) begin state <= CAPTURE; wptr <= AW'(1); end
        CAPTURE: begin
          wptr <= wptr + 1'b1;
          if (wptr == AW'(DEPTH - 1)) begin state <= IDLE; done <= 1'b1; end
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_ff @(posedge hclk) rdata <= mem[raddr];
endmodule
