# QubiC gateware: a command-driven pulse processor for superconducting qubits

A superconducting qubit is driven and read out with short microwave pulses. Each
pulse is a shaped envelope on a carrier of a few GHz, and each is placed on a
nanosecond grid. The analog front end mixes a local oscillator with an
intermediate-frequency (IF) signal. This digital design makes that IF signal: it
plays the drive and readout pulses of a quantum circuit on DACs at 1 GSPS. It
also digitizes what comes back from the readout resonator, demodulates it and
integrates it, one complex number per measurement and per shot.

The main idea is that a circuit is not stored as a waveform. It is stored as a
list of 128-bit **commands**. Each command says:

- which processing element plays the pulse;
- when the pulse starts on a sequence clock timer;
- which segment of that element's envelope memory to use;
- which carrier frequency and phase to apply;
- where the result goes.

A processing element makes the waveform on the fly. It rotates each stored
envelope point by the running carrier angle. A new circuit therefore needs only
a new command list, not new sample memory. A virtual Z gate costs nothing,
because it is just a different phase word in the following commands. The same
list is replayed, one **shot** per period, until the integration buffers are
full.

All of the RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`. Each block has a
self-checking testbench in `tb/`.

## Block structure

```
                     host bus (hclk)
                          |
                   host_interface ---- registers, buffer writes/reads, CDC
                    |      |       \
             cmd_buffer  env writes  acc/acq reads
                 |
           cmd_sequencer (clock timer)  --cmd/cmd_valid-->  proc_element x (M+K)
                                                             |            |
                                      M up elements: IF pulse|   K down elements: DLO
                                                             v            |
                                                         dac_switch       | ADC x conj(DLO)
                                                             |            v
                                   DAC pairs <---------------+     vec_accumulator x K
                                                             |            |
                  ADC, DLO, DAC streams --> acq_selector --> acq_buffer x L   acc_buffer x K
```

| Module | Role |
|---|---|
| `qubic_pkg` | Shared widths, the command struct `cmd_t`, the sample type and a saturation function |
| `cmd_buffer` | 64k x 128-bit command memory. It is written from the host clock and read by the sequencer. |
| `cmd_sequencer` | The clock timer plus command dispatch, repetition and conditional issue |
| `env_buffer` | One 1k x 32-bit envelope memory per element, holding I in [31:16] and Q in [15:0] |
| `cordic_rot` | A pipelined CORDIC rotator: it turns an (amplitude, phase) pair into IQ |
| `proc_element` | A processing element: envelope read plus 4 parallel CORDICs. `DOWN` selects up or down conversion. |
| `dac_switch` | An M-to-N switch that adds the up elements onto the DAC pairs, with saturation |
| `vec_accumulator` | Integrates one readout window of demodulated samples |
| `acc_buffer` | Stores one integrated result per shot, and sets `full` when the last entry is used |
| `acq_selector` | Picks one raw stream (ADC, DLO or DAC) for each acquisition buffer |
| `acq_buffer` | Captures up to 1024 clocks of a raw stream after arm and trigger |
| `host_interface` | A 32-bit host register/memory map that crosses into the DSP clock |
| `cdc_handshake` | A helper: toggle request/acknowledge transfer of a word between clocks |
| `qubic_top` | Wires all of the above together |

Clocks: the DSP runs at 250 MHz and the converters at 1 GSPS. Every datapath
therefore carries **NS = 4 samples per clock** of 16 bits. The host side runs on
its own clock, `hclk`.

## The command word

Fields run from MSB to LSB. The widths are those of the published command
format.

| Bits | Field | Width | Meaning |
|---|---|---|---|
| 127:97 | reserved | 31 | unused (their position is this design's choice) |
| 96 | cond | 1 | conditional command: issue only if `cond_ok` is high (fast reset) |
| 95:72 | freq | 24 | carrier frequency word, in steps of 1 GHz / 2^24 per sample |
| 71:70 | dest | 2 | DAC pair for an up element. Down elements ignore it. |
| 69:58 | start | 12 | first envelope address (taken modulo the envelope depth) |
| 57:46 | len | 12 | pulse length in DSP clocks (4 samples each) |
| 45:32 | phase | 14 | initial carrier phase, 2^14 steps per turn |
| 31:24 | element | 8 | target processing element: 0..M-1 up, M..M+K-1 down |
| 23:0 | trig_t | 24 | start time in DSP clocks on the sequence timer (4 ns units) |

Commands must be stored in non-decreasing `trig_t` order.

## Clock timer and command dispatch (the hardest part to get right)

`cmd_sequencer` owns the 24-bit **clock timer**. The timer counts DSP clocks
from the start of each period, which gives a 67 ms range at 4 ns. The sequencer
reads commands `0 .. NCMD-1` in address order and issues each command in the
first clock in which `timer >= trig_t`.

- **One command per clock.** Two commands with the same `trig_t` leave on
  consecutive clocks. The second one is *late* by one clock, which is flagged on
  `cmd_late`. A late pulse is delayed as a whole. Its carrier is still computed
  from the timer, so it stays phase-coherent.
- **Earliest issue.** The command buffer has one clock of read latency and a
  one-entry prefetch. The first command of a period therefore leaves at timer 2
  at the earliest. A `trig_t` of 0 or 1 is issued late.
- **Repetition.** When the timer reaches `PERIOD-1` the shot ends. If no stop
  was requested and no accumulation buffer is full, the timer and the command
  pointer restart at 0, and `seq_start` pulses at timer 0. Otherwise the
  sequencer goes idle. The check is made only at the period boundary, so a shot
  is never cut short. Commands not yet issued when the period ends are
  discarded.
- **Conditional commands.** A command with `cond = 1` is issued only if the
  `cond_ok` input is high in its issue clock. Otherwise it is dropped and
  `cmd_dropped` pulses. `cond_ok` is a top-level input, because the
  state-classification logic that would drive it is not part of this RTL.

## Processing elements and the carrier phase

A processing element holds at most one pulse at a time, and a new command
replaces the running one. For `len` clocks the element reads one envelope point
per clock, starting at `start`. Each point holds a complex value `(I, Q)`, and
is rotated by a different carrier angle for each of the 4 samples of its clock:

```
angle(k) = freq * (4*timer + k) + (phase << 10)      mod 2^24,   k = 0..3
```

Here `timer` is the clock timer value in the clock in which the point's carrier
is computed. The carrier therefore advances by `freq` every nanosecond and is
referenced to the sequence timer, not to when the pulse started. Two pulses of
the same frequency are phase-coherent whenever they play. The 14-bit phase
word is scaled onto the 24-bit circle.

The rotation is done by `cordic_rot`, which takes 16 micro-rotation stages on a
21-bit datapath: 16 bits of input, 3 bits of growth and 2 guard bits.

1. A quadrant pre-rotation uses the top two angle bits.
2. The 16 stages use a table of round(atan(2^-i) * 2^24 / 2pi).
3. The CORDIC gain is removed by multiplying by round(2^16 / 1.64676) = 39797,
   with rounding and saturation to 16 bits.

The error against a floating-point rotation stays within a few LSB. The latency
is ITER + 2 = 18 clocks.

- **Up element (`DOWN = 0`).** The rotated samples are the IF pulse, sent to
  the DAC switch together with `dest`.
- **Down element (`DOWN = 1`).** The rotated samples are a **digital local
  oscillator (DLO)**. The element multiplies the ADC I/Q samples by the complex
  conjugate of the DLO, `bb = adc * conj(DLO) >>> 15`, and hands the result to
  its accumulator. With a flat envelope this is plain demodulation at the
  carrier. A shaped envelope acts as a weighting window.

`dac_switch` adds every up element aimed at the same pair, sample by sample,
and saturates the sum to 16 bits. Pair `d` drives DAC `2d` with I and DAC `2d+1`
with Q, ready for an IQ mixer.

## Readout integration and acquisition

Each down element has a `vec_accumulator`. It sums all 4 x `len` demodulated
samples of one pulse, in 32 bits per component. It presents the sum one clock
after the last point, and `acc_buffer` appends that sum as the next entry.
Entries are kept in arrival order. With one readout per repetition, the entry
index is the shot number. When all `ACC_DEPTH` entries are used (2^17 by
default), `full` stops the sequencer at the next period boundary. A clear
from the host empties every acc buffer.

For debugging and calibration, `acq_selector` routes any raw stream to each of
the L acquisition buffers:

| Source numbers | Stream |
|---|---|
| 0, 1 | ADC I, ADC Q |
| 2+2j, 3+2j | DLO I/Q of down element j |
| 2+2K.. | the DACs |

`acq_buffer` captures 1024 consecutive clocks (4 samples each) after it is
armed, starting at the next `seq_start`.

## Latency summary

| Path | Clocks |
|---|---|
| `cmd_valid` to first point on a proc_element output | 20 |
| `cmd_valid` to first sample on a DAC | 21 |
| `trig_t` to first DAC sample for an on-time command (issue clock + registered `cmd_valid` + 21) | 22 |
| DLO point to baseband sample | 1 |
| last baseband sample (`bb_last`) to acc entry counted | 2 |
| CORDIC | 18 |

## Host interface and clock crossing

The host side is a simple 32-bit bus: `h_we`, `h_re`, `h_addr`, `h_wdata`, with
`h_rdata` valid on `h_rvalid` two `hclk` cycles after `h_re`. `h_addr[31:28]`
selects the region:

| Region | Contents |
|---|---|
| 0 | Registers: 0x00 CTRL (write 1 to: bit0 start, bit1 stop, bit2 clear acc, bit 3+l arm acq l); 0x01 PERIOD; 0x02 NCMD; 0x03 ACQSEL (byte l = source of acq buffer l); 0x04 STATUS (bit0 running, bit1 an acc buffer full, bit 8+l acq l done); 0x05 SHOTS; 0x10+k acc entry count of channel k |
| 1 | Command buffer: `a[17:2]` = command index, `a[1:0]` = 32-bit lane. Writing lane 3 stores the whole command, so write lanes 0, 1 and 2 first. |
| 2 | Envelope buffers: `a[27:20]` = element, `a[9:0]` = point |
| 3 | Acc buffers (read): `a[27:20]` = channel, `a[17:1]` = entry, `a[0]` = 0 for I or 1 for Q |
| 4 | Acq buffers (read): `a[27:20]` = buffer, `a[10:1]` = entry, `a[0]` = low or high 32 bits |

The buffer memories are true two-clock RAMs: the host port is on `hclk` and the
DSP port on `clk`. Control and status words cross between the clocks in
`cdc_handshake`, which resends the latest value with a toggle
request/acknowledge. A command pulse (start, stop, clear, arm) is carried as a
toggle bit, so it can never be lost or doubled.

## Parameters and what they hold

| Parameter | Default | Origin |
|---|---|---|
| `CMD_DEPTH` | 65536 | published command buffer size |
| `ENV_DEPTH` | 1024 | published envelope buffer size (x 32 bits) |
| `M`, `K` | 4, 4 | chosen: up and down elements |
| `NDEST` | 4 | chosen; the 2-bit `dest` field allows 4 DAC pairs |
| `L` | 2 | chosen: acquisition buffers |
| `ACC_DEPTH` | 131072 | chosen: about 100 readouts per repetition x 1024 repetitions |
| `ACQ_DEPTH` | 1024 | chosen |
| `ITER` (CORDIC) | 16 | chosen |

With these sizes, every sequence of the published experiments fits in one run:

- **Single-qubit randomized benchmarking.** 512 Cliffords take about 1024 drive
  pulses plus a readout. That is about 1026 commands out of 65536, and about
  33 us out of the 67 ms timer range. The 1000 shots need 1000 acc entries.
- **Two-qubit randomized benchmarking.** 32 Cliffords need a few hundred
  commands. The 2000 shots need 2000 entries per channel.
- **Randomized compiling.** About 100 circuits are loaded at once, with up to
  16k commands and about 600 us per circuit. They fill 60 ms of the 67 ms
  period. With 1024 shots they produce 102,400 results per channel. This run is
  what sets the acc buffer depth to 2^17.

## Where this design departs from the published one, or fills gaps

- **Not built:**
  - the DAC/ADC boards;
  - the board support logic;
  - the Ethernet/UDP link;
  - the LO/PLL and RF mixing hardware;
  - multi-board synchronization;
  - the qubit-state classifier that decides fast reset.

  The classifier's decision enters as the `cond_ok` input.
- The published sections describe the command fields and their widths, but not
  the **order of the fields or where the reserved bits sit**. Both are chosen
  here.
- The **dispatch rule** is this design's choice, as are the earliest issue at
  timer 2, discarding unissued commands at the period end, and replacing a
  running pulse.
- The published down-conversion equation has no initial phase. Here the down
  element also applies the command's phase, because the block diagram feeds
  freq and phase to every element.
- The published up-conversion equation writes the initial phase as
  `e^{phi0}`. This design implements `e^{j phi0}`.
- The down element's envelope is used as a weighting window on the DLO. The
  published text does not say what that buffer holds.
- The published text names the **AP-to-IQ conversion** but not how it is done.
  A CORDIC is used here, and the envelope is stored directly as IQ. Amplitude
  and phase enter through the command (phase) and the envelope values.
- The CDC scheme, the host register map, the number of elements and buffers,
  and the depths of the acc and acq buffers are all this design's choices.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. It also has
a watchdog. Any testbench can be run with plain verilator (5.x):

```
verilator --binary --timing --assert -j 4 -y rtl +libext+.sv \
    --top-module qubic_top_tb rtl/qubic_pkg.sv tb/qubic_top_tb.sv
./obj_dir/Vqubic_top_tb
```

Replace `qubic_top_tb` with any other testbench name. `qubic_pkg.sv` is listed
first so that the package is compiled before its users; `-y rtl` finds the
remaining modules.

| Testbench | What it shows |
|---|---|
| `qubic_top_tb` | End to end. Every parameter is at its default except `ACC_DEPTH`, which is 1024, so that the acc buffers fill quickly. Drive, fast-reset and readout commands are stored through the host bus. DAC pair 0 is looped back into the ADCs. The run repeats until the acc buffers fill (1024 shots). Every DAC sample of every shot is checked against a floating-point model, and so are the integrated results, two acquisition captures and a clear. The test counts late issues, dropped conditional commands, summed pulses and repetitions, and fails if any of them never happens. |
| `rb_workload_tb` | The full-size run: every parameter is at its default. It plays a 512-Clifford single-qubit RB-style sequence: 1024 X90 pulses with random virtual Z in the phase word, then a readout, 4 shots, and a host stop. Every drive and readout sample is checked, and so is shot-to-shot identity of the results. |
| `rb2q_workload_tb` | A two-qubit RB-style sequence with 32 Cliffords. Each Clifford is an X90 on each qubit plus a cross-resonance pulse. Element 2 plays the CR pulses and is then reused for a readout tone. Two readout tones share DAC pair 3 and one ADC pair, and are demodulated by two down elements. It uses `ACC_DEPTH` = 1024, and takes 2048 shots as two batches of 1024: the acc buffers fill, the sequencer stops, and the host reads and clears them. |
| `rc_workload_tb` | A randomized-compiling style load at default size: 100 random depth-5 two-qubit circuits in one period, 1900 commands. Each circuit has its own twirling phases and its own two readouts. The relaxation time is shortened to 400 clocks per circuit. The first of three repetitions is checked sample by sample. All 300 acc entries per channel are checked in circuit order. |
| `<module>_tb` | A per-block test of each module in `rtl/`, against an independent model, including latencies |

`qubic_top_tb` simulates in a few seconds and `rb2q_workload_tb` in about 30 s.
The per-block tests take less than a second each.
