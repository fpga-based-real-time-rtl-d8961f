# Multi-tau photon autocorrelator for dynamic light scattering

Dynamic light scattering (DLS) sizes nanoparticles from how fast the intensity of scattered
light fluctuates. A photon-counting detector turns that light into a stream of TTL pulses. The
instrument has to compute the autocorrelation of that stream over lag times from about 10 ns to
tens of minutes, in real time and without storing the stream. This RTL is such a correlator,
for the programmable-logic part of one FPGA. It follows the architecture published by
Islambek, Yang, Li and Li ("FPGA-based real-time autocorrelator and its application in dynamic
light scattering"), which is built on a Xilinx Artix-7 with a soft processor for readout:

* the detector line is sampled at 800 MHz (1.25 ns) and cut into 8-sample words at 100 MHz;
* an interval counter turns each 10 ns word into one number: the time since the previous
  photon, in 1.25 ns units;
* a multi-tau correlator of 35 blocks and 288 channels correlates that 10 ns stream. The
  sample time doubles from block to block, so the lags run from 10 ns to about 43 minutes;
* every 20 s the 64-bit channel accumulators are read out into a block RAM, one row per
  period, and cleared;
* a four-state controller runs a measurement. The processor drives it and reads the RAM row by
  row and column by column over an AXI4-Lite port.

The processor, its program memory, the AXI interconnect, the UART and the clock generator are
vendor parts and are not included. The top module's AXI4-Lite slave port is where the
interconnect connects, and both clocks are inputs.

```
 photon_in ──► input_deserializer ──► photon_counter ──► correlator_unit ──► dump_sequencer ──► result_ram
  (TTL)        800 MHz gate, 1:8      interval per 10 ns   35 blocks, 288 ch     one row per        256 x 288
                                                           hold regs on clear    readout period     x 64 bit
                                                                 ▲                                     │
                 readout_timer (20 s) ── clear ──────────────────┤                                     ▼
                 control_fsm 1-2-3-4 ── start / stop / run ──────┘     corr_axi_slave ◄── result_mux ◄─┘
                        ▲                                                   │
                        └──────────── reset request, start, stop ───────────┘ AXI4-Lite to the processor
```

All logic except the first flip-flops of the input runs on the 100 MHz system clock. The
correlator blocks do not get divided clocks. Each block gets a clock enable instead.

## From photons to 10 ns samples

**Input gate and deserializer** (`input_deserializer`). One flip-flop on the 800 MHz clock
samples the line, and a shift register collects 8 samples. Every 8 fast cycles the shift
register is copied to a word register, which the 100 MHz domain takes on each of its edges.
Bit 0 of a word is the earliest sample. The fast clock must be exactly 8 times the system
clock and come from the same clock generator. Then each system cycle gets exactly one new word,
whatever the phase of the fast word counter, and the hand-over is a timed path between related
clocks. The published design names a "fast gate" followed by a deserializer. The shift-register
form and the bit order are choices of this RTL, and a vendor deserializer primitive could
replace the module.

**Interval counter** (`photon_counter`). A photon event is a rising edge of the line: a 1
sample after a 0 sample, including across word boundaries. Detector pulses are 10 ns wide, so
counting high samples would count each photon eight times. The counter keeps the number of
1.25 ns periods since the last event. For each word:

* no event: output 0, and the elapsed count grows by 8;
* events: output the periods from the last event before the word to the last event in the
  word, and restart the elapsed count from that event.

With one photon per word this is exactly the published "number of 800 MHz cycles between two
events". The published example waveform shows four 10 ns windows with one photon each and
counter outputs 6, 8, 3 and 11. The unit test reproduces those four values. Several events in
one word give the sum of their intervals, which keeps the total time right. At the published
count rate (about 5·10^6 counts/s, 0.05 photons per word) a word never holds two events, because
a 10 ns pulse covers 8 samples. The counter saturates at 2^16−1 periods (82 µs). At the start of
a measurement the start instant counts as the previous event.

The samples are in 1.25 ns units. The published design leaves the scaling to the host: a
correlation value times 1.25² gives ns².

## The multi-tau correlator

This is the core of the design (`correlator_unit`, made of `corr_block` and
`clock_enable_gen`).

### Blocks, lags and channels

| block s | sample time | enabled every | channels | lags (in sample times of the block) | lags in time |
|---|---|---|---|---|---|
| 0 | 10 ns | cycle | 16 | 0 … 15 | 0 … 150 ns |
| 1 | 20 ns | 2 cycles | 8 | 8 … 15 | 160 … 300 ns |
| 2 | 40 ns | 4 cycles | 8 | 8 … 15 | 320 … 600 ns |
| s | 2^s · 10 ns | 2^s cycles | 8 | 8 … 15 | 8·2^s … 15·2^s · 10 ns |
| 34 | 172 s | 2^34 cycles | 8 | 8 … 15 | 23 … 43 min |

The channel count, 16 + 34 × 8 = 288, and the doubling factor are the published numbers. The
lag layout is the usual multi-tau one: each new block continues where the previous one ends, at
half the resolution. Channels are numbered block by block. Channel c < 16 is block 0 with lag c.
Channel 16 + 8(s−1) + k is block s with lag 8 + k.

### What one block does

A block keeps its last 15 input samples in a delay line. In each cycle where its enable is high:

* the new sample `x` enters the delay line;
* each channel adds `x × (sample lag steps earlier)` to its 64-bit accumulator. Samples from
  before the start count as 0.

All channels of a block update in the same cycle, with one multiplier per channel. Block 0 runs
every cycle, so its 16 multiply-adds are the throughput-critical path. Block s runs once every
2^s cycles.

### Where a block's samples come from

The sample of block s ≥ 1 is the **sum** of two consecutive samples of block s−1. A block
therefore holds the sum of 2^s ten-ns samples. The published text speaks of averaging. Summing
loses no precision, and the host can divide by 2^s. The sample width grows by one bit per block,
from 16 bits in block 0 to 50 bits in block 34, so the sums never overflow.

Block s does not wait for block s−1's newest sample. When block s is enabled, block s−1 is
enabled in the same cycle, since 2^(s−1) divides 2^s. Block s adds the two samples block s−1
*already stored*. Its k-th sample therefore covers the 10 ns samples
(k−2)·2^s+2 … (k−1)·2^s+1, a window that trails the block-0 stream by 2^s−1 cycles. Every
sample of the block trails by the same amount, so both factors of every product shift together
and the correlation does not change. The gain is timing: no adder chain runs through the 35
blocks, and every sum is one register-to-register adder. The unit tests compute the reference
from exactly that window formula.

### Clock enables

As published, block s has a cycle counter c_s that runs from 1 to E_s = 2^s. The block is
enabled in the cycle where c_s = E_s, and then c_s starts again at 1. Block 0 is therefore
always enabled. All counters are held at 1 while the measurement is not running, so they start
together: in the k-th run cycle, block s is enabled exactly when 2^s divides k.

### Clear and hold registers

The published design clears the accumulators as it reads them into RAM every 20 s. Here a clear
does three things in one cycle:

* it copies each accumulator, including the product of that cycle, into a hold register;
* it restarts the accumulator from 0;
* the delay lines keep running.

So a readout loses no product, and the 288 values can be copied to RAM over the following 288
cycles while the correlation goes on. The cost is a second set of 288 × 64 flip-flops.

## Measurement control and readout

**Controller** (`control_fsm`). It has four states, which keep their published numbers as
encodings:

| state | meaning | entered when |
|---|---|---|
| 1 idle | after reset, or after the results have been read | reset request = 1 |
| 2 ready | waiting for start | reset request = 0 (in state 1) |
| 3 processing | `run` high: counter, enables and timer active | start command (in state 2) |
| 4 end | results in RAM, waiting for readout | stop command or RAM full (in state 3) |

Start is a pulse in the last cycle of state 2. It empties the delay lines, accumulators, interval
counter and RAM row counter one cycle before `run` rises. Stop is a pulse in the first cycle of
state 4, and it also clears, so the last partial period reaches the RAM. `results_ready` comes
up when that final copy is done. The published diagram gives the four states, the labels
"reset = 1" and "reset = 0", and START and STOP. The start, stop and RAM-full triggers are
choices of this RTL.

**Timer** (`readout_timer`). It counts run cycles and pulses a clear every 2·10^9 cycles
(20 s).

**Readout into RAM** (`dump_sequencer`, `result_ram`). Each clear starts a pass that writes the
288 hold values into the next RAM row, column c = channel c, one per cycle. A row is one
readout period, and the full correlation is the column-wise sum of the rows written. The RAM
has 256 rows (85 minutes of 20 s periods, 4.7 Mbit). A clear that finds the RAM full is
dropped, and the controller ends the run. A clear during a pass would overwrite the hold values
being copied and sets the sticky `overrun` flag. That needs a readout period shorter than 288
cycles, so it never happens at 20 s.

**Register port** (`corr_axi_slave`, `result_mux`). The published system diagram puts a MUX
between the RAM and the AXI interconnect. Here the MUX selects the 32-bit word a bus read
returns:

| address | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | RW | bit 0 reset request (1 after reset); writing 1 to bit 1 = start, bit 2 = stop (pulses, read as 0) |
| 0x04 | STATUS | RO | [2:0] state 1..4, [3] readout busy, [4] RAM full, [5] overrun, [31:16] rows written |
| 0x08 | ROW | RW | RAM row to read |
| 0x0C | COL | RW | RAM column (channel) to read |
| 0x10 | DATA_LO | RO | RAM[ROW][COL] bits 31:0 |
| 0x14 | DATA_HI | RO | RAM[ROW][COL] bits 63:32 |
| 0x18 | INFO | RO | [15:0] channels (288), [23:16] blocks (35) |

Writes are accepted when address and data are both valid. Reads return data one cycle after the
address handshake. Responses are always OKAY. Assertions check that a response stays valid and
unchanged until it is taken. The RAM read has one cycle of latency behind ROW/COL, which any bus
transaction in between covers.

A measurement, as the processor runs it:

1. Write CTRL = 0: state 2.
2. Write CTRL = 2: start, state 3.
3. Wait, or write CTRL = 4 to stop.
4. Poll STATUS until state 4 and readout busy = 0.
5. For each row r < rows written, and each column c < 288: write ROW = r and COL = c, then read
   DATA_LO and DATA_HI.
6. Write CTRL = 1: state 1.

On the host, the correlation of channel c is the sum over rows, times 1.25². The host also does
the normalization (the 1/(N−j) of the discrete estimator, or the symmetric multi-tau
normalization). The hardware keeps no per-channel product counts. Channel c of block s receives
one product per 2^s cycles, so the counts follow from the run length.

## Sizes

| parameter | default | origin |
|---|---|---|
| `S` blocks | 35 | published |
| `P_FIRST` / `P` channels | 16 / 8 | published |
| lag factor between blocks | 2 (fixed in the structure) | published |
| `ACC_W` accumulator | 64 bits | published |
| `READOUT` | 2·10^9 cycles = 20 s | published (20 s) |
| system / sample clock | 100 / 800 MHz | published |
| `CNT_W` interval width | 16 bits | this RTL |
| `ROWS` RAM rows | 256 | this RTL |

Shared constants are in `corr_pkg`. At the defaults the design holds about 19,300 flip-flops,
mostly the 288 accumulators and their hold registers. It has 288 multipliers of up to 50 × 50
bits, truncated to 64, and 4.7 Mbit of RAM. All of this is a generic coarse synthesis count, not
a vendor mapping onto DSP slices.

## Limits and departures from the published design

* **Accumulator overflow at the longest lags.** The samples are intervals in 1.25 ns units, so
  a block-s sample is about 8·2^s whatever the count rate. One product is then about 2^(6+2s),
  and 64 bits wrap in blocks 28–34 (lags of about 21 s and more) even within one 20 s period.
  From block 29 on, a single product reaches 2^64. Blocks 0–27 fit with a wide margin. The
  published measurements, with decay times up to about 0.1 s, need lags only to about 1 s
  (block 23). The width follows the published 64 bits. Accumulators and RAM words wrap modulo
  2^64.
* **Longest lag.** It is 15 × 2^34 × 10 ns = 42.9 min. The published text says about 45 min for
  the same block structure.
* Blocks sum their inputs instead of averaging them (see above).
* The lag layout, the hold registers, the RAM row layout, the register map, the controller's
  triggers, rising-edge event detection, the counter width and saturation, and the RAM depth
  are choices of this RTL. The published design describes those parts by their function only.
* The RAM is not cleared between measurements. Only the rows counted in STATUS are valid.
* The processor, its local memory, the AXI interconnect, the UART, the clock generator and the
  5 V to 3.3 V level converter on the input are not included.

## Simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/corr_pkg.sv \
          tb/tb_dls_correlator_top.sv --top-module tb_dls_correlator_top
./obj_dir/Vtb_dls_correlator_top
```

Substitute any testbench name. The end-to-end tests are:

* `tb_dls_correlator_top`: the system at reduced size (6 blocks, 8 RAM rows, a 1500-cycle
  readout period), in two measurements. In the first, periodic clears fire and the run is
  stopped by command. In the second, a photon-free gap drives the counter into saturation and
  the run ends on a full RAM. The test reads every RAM word over AXI and compares it with a
  multi-tau reference computed from the 10 ns stream, period by period. It checks the counter's
  intervals against the rising edges of the generated line. It also counts that every block
  enable, the timer clear, both stop causes, saturation and all four states occurred.
* `tb_dls_full`: the same flow with every parameter at its default (35 blocks, 288 channels,
  256 rows, 20 s period): a 30 µs measurement stopped by command, with all 288 channels of
  row 0 read back and checked. Building it takes about a minute; it runs in under a second.
* `tb_dls_workload`: the default-size system on a light-scattering-like photon stream at
  about 5e6 counts/s. The pulse rate switches between half and one and a half times the mean,
  as a random telegraph signal with a 1 µs correlation time. The measurement runs for 600 µs
  (about 2800 photons) and is stopped by command. Every counter interval and all 288 channels
  are checked against the reference, and the photon count against the intended rate.

The unit tests cover the enables at full size (`tb_clock_enable_gen`), one block against a
direct sum (`tb_corr_block`), and the 7-block correlator with clears at random times
(`tb_correlator_unit`). They also cover the deserializer, counter, timer, controller, readout
sequencer, RAM, multiplexer and AXI slave. Simulations start from random register contents, so
everything read is reset first.
