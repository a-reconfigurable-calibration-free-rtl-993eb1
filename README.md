# Digital-to-time converter on a serial transceiver

A digital-to-time converter (DTC) turns a number into a time interval: here,
a pulse whose width, and the spacing to the next pulse, are set digitally.
This design does not build delay lines. It builds the pulses as bit patterns
and sends them out of an FPGA's multi-gigabit transceiver. At 10 Gb/s a bit
lasts 100 ps, so every edge of the output lands on a 100 ps grid. The grid is
as stable as the transceiver's PLL, so nothing has to be calibrated. Range
is limited only by counter widths, here to about 52 us. Running the
transceiver at another line rate changes the resolution. The logic does not
change, because it counts in bits, not in picoseconds.

The hard part is feeding the serializer. It takes one 32-bit word per
fabric clock (312.5 MHz at 10 Gb/s), and a pulse train of arbitrary widths
has to be cut into those words on the fly, one word per clock, with no
memory holding the waveform. The *frame encoder* does this. Ahead of it, a
*data generator* produces the stream of pulse descriptions. It has four
modes: a single pulse, a fixed repeated pulse, a programmed sequence of
widths, and pseudo-random widths.

```
 host config ──► data_generator ──{T,L}──► frame_encoder ──32b──► tx_fifo ──► tx_buffer ──► serializer ──► tx_serial
                 ├ phase_accumulator                          (fabric clock)    (CDC)     (bit clock)     (to line driver)
                 ├ param_lut 4k x 12
                 └ prng (12 LFSRs)
```

## How a timing signal is described

Every output signal is two numbers, both counted in line bits:

* **T**, the *interval*: the number of 1s, which is the pulse width;
* **L**, the *length*: the number of bits from this signal's rising edge to
  the next signal's rising edge (T ones followed by L-T zeros).

Signals follow each other with no gaps, so the line carries the plain
concatenation of `1^T 0^(L-T)` patterns. An idle line is the signal
{T=0, L=32}, which is one frame of zeros. `dtc_pkg::timing_param_t` carries
one {T, L} pair. Both fields are 19 bits wide (up to 524287 bits, 52.4 us at
10 Gb/s).

Two limits follow from the encoder, described next. L must be at least 32,
so signals are at least 3.2 ns apart at 10 Gb/s. T may be anything from 0 to
L. The generator raises a smaller L to 32 and lowers a larger T to L. A
pulse of 1 ns (T=10) is therefore possible, but pulses spaced closer than one
frame are not.

## Frame encoder: cutting the pulse train into 32-bit words

`frame_encoder` keeps two registers between frames:

* `L_temp`, the bits of the current signal that are still to be sent;
* `T_temp`, how many of those bits are 1s.

Bit 31 of a frame goes on the line first. Each frame is built as the OR of
two parts:

* **Part1** fills the high bits with the rest of the current signal;
* **Part2** fills the low bits with the start of the next signal, if the
  current signal ends inside this frame.

The encoder picks one of three cases from `L_temp`:

| case | condition       | Part1                                   | Part2                                                         | next state |
|------|-----------------|-----------------------------------------|---------------------------------------------------------------|------------|
| 1    | `L_temp == 32`  | `T_temp` ones, then zeros               | zero                                                          | take the next {T,L}: `T_temp=T`, `L_temp=L` |
| 2    | `L_temp > 32`   | `min(T_temp,32)` ones, then zeros       | zero                                                          | `T_temp -= min(T_temp,32)`, `L_temp -= 32` |
| 3    | `L_temp < 32`   | `T_temp` ones in the top `L_temp` bits  | `L_temp` zeros, then `min(T,32-L_temp)` ones, then zeros      | take the next {T,L}: `T_temp = T - min(T,32-L_temp)`, `L_temp = L + L_temp - 32` |

Case 3 closes a signal inside a frame. For the new `L_temp` to stay
positive, the next signal must have L >= 32-L_temp, so L >= 32 is required.

A worked example with every signal {T=20, L=40}, starting at `L_temp=40`,
`T_temp=20`:

```
frame A  case 2  11111111111111111111000000000000   T_temp 0,  L_temp 8
frame B  case 3  00000000|111111111111111111110000  T_temp 0,  L_temp 16   (Part1 = 8 zeros)
frame C  case 3  0000000000000000|1111111111111111  T_temp 4,  L_temp 24   (20 ones need 4 more)
frame D  case 3  111100000000000000000000|11111111  T_temp 12, L_temp 32
frame E  case 1  11111111111100000000000000000000   ...
```

The encoder produces one frame per clock. The state update is a single
combinational step (masks built from shifted all-ones words) followed by an
output register. A parameter is taken (`p_valid && p_ready`) only in cycles
whose frame closes a signal, which is cases 1 and 3. Downstream, the encoder
has valid/ready: when the transmit FIFO is full, the frame and the state
stand still. At reset `L_temp=32` and `T_temp=0`, so the first frame is all
zeros and takes the first parameter.

## Data generator: where T comes from

`data_generator` latches a `dtc_cfg_t` on `start` and offers one parameter
after another:

| mode              | T                                    | number of signals              |
|-------------------|--------------------------------------|--------------------------------|
| `MODE_SINGLE`     | `t_fixed`                            | 1                              |
| `MODE_FIXED_SEQ`  | `t_fixed`                            | `count` (0 = until `stop`)     |
| `MODE_TIMING_SEQ` | `t_base + LUT[phase[31:20]]`         | `count` (0 = until `stop`)     |
| `MODE_RANDOM`     | `t_base + LUT[rnd]`                  | `count` (0 = until `stop`)     |

L is `l_len` for every signal. When a finite run is over, `done` rises and
the generator goes back to offering the idle parameter.

**Programmed sequences.** The host writes a rule for how the width changes
into the 4096 x 12 parameter table (`param_lut`). A 32-bit phase
accumulator advances by the control word K each time the encoder takes a
parameter. The top 12 bits of the phase address the table. One pass
through the table takes 2^32/K signals, after which the sequence repeats.
For example, a table holding nine steps with K = ceil(2^32/9) = 477218589
gives a repeating sequence of nine rising widths.

**Random widths.** `prng` runs twelve LFSRs of 9, 10, ..., 20 stages, each
with a primitive feedback polynomial (listed in `dtc_pkg::lfsr_taps`). Bit j
of a 12-bit random number is the top stage of LFSR j. The number repeats
only after the least common multiple of the twelve periods 2^n - 1, about
2^132 steps. The product of the periods (about 2^174) would hold only if
they were pairwise coprime, and 2^a - 1 and 2^b - 1 share a factor whenever
a and b do. The number addresses the same table. A table holding the ramp
`LUT[a] = a` gives widths spread evenly over `t_base .. t_base+4095`. Any
other distribution can be had by loading its inverse cumulative function
instead.

**One parameter per clock.** The table has a registered read. So that the
parameter offered always matches the current address, the generator reads
one step ahead: in a cycle where a parameter is taken, it presents
`phase + K` (or the random number's next value, `rnd_next`) as the read
address. After `start` there is one cycle with `p_valid` low, while the
first read completes.

## Transmit path and clocks

* `tx_fifo`: a 16-word FIFO in the fabric clock domain. Its ready signal
  throttles the encoder.
* `tx_buffer`: an 8-word dual-clock FIFO with Gray-coded pointers. It moves
  frames from the fabric clock into the bit-clock domain and absorbs the
  phase between the two clocks.
* `serializer`: a shift register on the bit clock. Every 32 bit clocks it
  loads a word and sends it MSB first. If the buffer is empty at that
  moment, it sends 32 zeros and pulses `underflow`. This happens normally
  for the first few words after reset.

The transceiver's 8B/10B encoder is not used. The bits must reach the line
exactly as encoded.

The bit clock and the fabric clock are inputs to `dtc_top`. In a real
device they come from the transceiver PLL. The fabric clock must be at least
bit clock / 32. If it is faster, the FIFO fills and the encoder is simply
stalled now and then. If it is slower, the line underflows and the timing
is broken. The PLL, the differential output driver and the unused receive
half of the transceiver are not part of this RTL.

## Top-level interface (`dtc_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | fabric clock (bit rate / 32) and its synchronous active-low reset |
| `ser_clk`, `ser_rst_n` | in | bit clock and its reset |
| `cfg` (`dtc_cfg_t`) | in | `mode`, `t_fixed`, `l_len`, `count`, `k`, `t_base`; sampled on `start` |
| `start`, `stop` | in | one-clock strobes on `clk` |
| `lut_we`, `lut_waddr[11:0]`, `lut_wdata[11:0]` | in | table write port on `clk` |
| `busy`, `done` | out | a run is in progress; the last signal of a finite run has gone to the encoder |
| `tx_serial` | out | the timing signal, one bit per `ser_clk` |
| `underflow` | out | the serializer found no word (zeros sent) |
| `fifo_level[4:0]` | out | transmit FIFO fill |

To use it: write the table (timing-sequence and random modes only), set
`cfg`, and pulse `start`. The first pulse appears on `tx_serial` a few
fabric clocks later, after the FIFO, the synchronisers and the serializer's
next load slot.

## Choices made where the description leaves freedom

The dataflow and the numeric parameters come from the published design:
the four functions, the 32-bit frame, the three-case compositing rule, the
4k x 12 table, the phase accumulator with control word K, the twelve LFSRs
taking one MSB each, the bypassed 8B/10B encoder, the transmit buffer as the
clock-domain crossing, and 10 Gb/s. Everything below is this design's own
choice:

* **Phase accumulator width and step.** D = 32. It advances once per signal
  taken, not once per fabric clock. With this choice, K sets the number of
  signals in one sequence period (2^32/K). The source's formula
  L = 2^D/(K f_s) reads as if K set the length of each signal; with f_s as
  the rate of signals it becomes the duration of a sequence period.
* **Table contents.** A table entry is an offset added to `t_base`. The
  12-bit width alone would reach only 409.5 ns.
* **Random mode.** The random number is used as the table address.
* **LFSRs.** Lengths 9..20 and their polynomials; the all-ones seed; the top
  stage used as the random bit.
* **Encoder limits.** At most one signal closes per frame (L >= 32), as the
  source's compositing rule implies.
* **Handshakes, depths and reset.** Valid/ready handshakes, FIFO and buffer
  depths, reset values, MSB-first bit order, and zeros on underflow.
* **Shortest interval.** Published figures give both 2 ns and 1 ns as the
  shortest interval (1.0179 ns was measured). The RTL accepts any T from 1
  bit, so 1 ns is covered.
* **Host link.** The link to the host computer is not described; it is
  replaced by the plain `cfg`/`start`/`stop`/table ports.

The source reports 4176 flip-flops for its encoder. This single-stage
encoder has 73, so the original is probably pipelined for timing closure.
This RTL has not been through FPGA place-and-route at 312.5 MHz. The
combinational path of the encoder (a 19-bit compare, subtract and 32-bit
mask) may need a pipeline stage to meet that clock.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* `tb_lfsr` measures the period of all twelve LFSRs (exactly 2^n - 1).
* `tb_prng` compares against an independent model of the twelve
  m-sequences and checks how evenly the numbers fill 64 buckets.
* `tb_phase_accumulator` checks the accumulator, and the nine-step sweep,
  against a model.
* `tb_param_lut` checks the table, including read-during-write behaviour.
* `tb_frame_encoder` compares every frame with a bit queue built straight
  from the definition `1^T 0^(L-T)`. The parameters are random, the
  downstream ready is random, and all three cases occur. It also checks one
  frame per clock.
* `tb_data_generator` checks all modes, clipping, one parameter per clock,
  and 1,000,000 random intervals, which must be evenly spread.
* `tb_tx_fifo`, `tb_tx_buffer` (unrelated clocks) and `tb_serializer`
  (word every 32 bit clocks, underflow) check the transmit path.
* `tb_dtc_top` runs the whole design at its default sizes, with a 100 ps
  bit clock. It decodes `tx_serial` into pulses and compares widths and
  spacings, in bits and in picoseconds, against the parameters handed to
  the encoder. It covers 1 ns and 40 us pulses, a 100 ps width step, a
  fixed sequence, two periods of a nine-step sequence, 100 random widths,
  and `stop`. It counts that every mode, all three encoder cases, underflow
  and FIFO back-pressure occurred.
* `tb_frame_linearity` measures pulse-width linearity through the whole
  design. It sends codes T = 1..64, each at all 32 bit positions of a frame,
  and computes DNL and INL from the measured widths. Both come out at
  exactly 0 LSB; the hardware figures of +-0.02 and -0.04/+0.03 LSB are
  properties of the analog output, which is not modelled here.
* `tb_random_intervals` sends 1,000,000 random widths through the whole
  design. Each pulse must equal its parameter, and the histogram of the 64
  possible widths must be flat to within 4 percent. It takes about 20 s.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -y rtl -y tb +libext+.sv \
    rtl/dtc_pkg.sv tb/tb_dtc_top.sv --top-module tb_dtc_top -o sim
./obj_dir/sim
```

Substitute any other testbench name. The whole-design run simulates about
60 us of line time in well under a second once built. The warnings that
Verilator prints (unused package constants, unused bits) are harmless.
