// qubic_pkg -- shared types and constants of the qubit-control gateware.
//
// The pulse command is a 128-bit word. Its fields, from the most significant
// to the least significant bit, are: condition (1), carrier frequency (24),
// destination IQ pair (2), envelope start address (12), envelope length (12),
// carrier phase (14), processing-element index (8) and trigger time (24).
// The field widths and their order follow the published command format; the
// 31 reserved bits are placed here above the condition bit, which is this
// design's choice (the format gives their count but not their position).
//
// Sample rates: the converters run at 1 GSPS and the DSP at 250 MHz, so every
// stream carries NS = 4 samples of 16 bits per clock, oldest sample in [0].
package qubic_pkg;

  localparam int CMD_W    = 128;
  localparam int TRIG_W   = 24;   // trigger time, DSP clock cycles from sequence start
  localparam int START_W  = 12;   // envelope start address
  localparam int LEN_W    = 12;   // envelope length, points
  localparam int FREQ_W   = 24;   // carrier frequency, 1 GHz / 2^24 per step
  localparam int PHASE_W  = 14;   // carrier phase, 360 deg / 2^14 per step
  localparam int ELEM_W   = 8;    // processing-element index
  localparam int DEST_W   = 2;    // destination DAC pair
  localparam int RSVD_W   = 31;

  localparam int NS       = 4;    // samples per DSP clock (1 GSPS / 250 MHz)
  localparam int SAMPLE_W = 16;   // converter sample width
  localparam int ANG_W    = 24;   // phase word width, full circle = 2^24
  localparam int BB_W     = 18;   // baseband product width after mixing

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  typedef struct packed {
    logic [RSVD_W-1:0]  reserved;
    logic               cond;
    logic [FREQ_W-1:0]  freq;
    logic [DEST_W-1:0]  dest;
    logic [START_W-1:0] start;
    logic [LEN_W-1:0]   len;
    logic [PHASE_W-1:0] phase;
    logic [ELEM_W-1:0]  element;
    logic [TRIG_W-1:0]  trig_t;
  } cmd_t;

  // Saturate a wide signed value to a 16-bit sample.
  function automatic sample_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
