# QICK firmware in SystemVerilog

This is a register-transfer model of the programmable-logic firmware of the
QICK qubit controller. The design is built around one idea: **a program
decides *what* happens and *when*, but it does not have to run in step with
the clock that makes things happen.** A small processor, the *tProcessor*,
runs ahead of a free-running 48-bit master clock. Every instruction that
produces an output (play a pulse, raise a marker, trigger a readout) carries
a time tag. Such instructions are not executed when they are decoded. They
are pushed, with their absolute time, into a queue for their output channel.
Each channel's timer releases the entry when the master clock reaches that
time. The output timeline is therefore exact to one fabric clock, however
long the branches, loops and arithmetic in between take. The program only
waits when a queue is full, when it asks to wait for a time, or when it waits
for a measurement result.

Around the processor sit:

* **signal generators**: one per DAC. Each plays complex pulse envelopes
  from a table memory, mixed with a phase-coherent tone.
* **readout chains**: one per ADC. Each downconverts, filters, decimates
  and integrates the incoming samples in windows opened by the processor, and
  returns each result to the processor so that a program can branch on a
  measurement.
* **a digital output block**: marker outputs, two of which trigger the
  readouts.

```
              host ports (program / data memory, envelope upload, readout setup, buffers)
                 |                    |                          |
   +-------------v--------+   +-------v--------+         +-------v---------+
   |  tProcessor          |   | signal gen 0..6|--DAC x7 | readout 0..1    |<--ADC x2
   |  fetch/exec, regs,   |   |  queue -> ctrl |  16 smp | DDC/bypass      |  8 smp
   |  ALU, cond, stack,   |ch1..7 -> table+DDS|  /clock | FIR, decim 8    |  /clock
   |  data mem, t_off     |-->|  -> mix switch |         | average window  |
   |  8 channel queues    |   |  -> gain       |         | avg + raw buf   |
   |  + time controllers  |   +----------------+         +--+-----------+--+
   |  48-bit master clock |ch0  +-----------+  trig 0,1     |           |
   |                      |---->| digital IO|---------------+           |
   |  readout ports  <----+-----|  markers  |      feedback (I,Q sums)  |
   +----------------------+     +-----------+<--------------------------+
```

Everything runs in one clock domain, the fabric clock. In the reference
system it is 384 MHz. Per fabric clock a DAC takes 16 samples (6.144 GS/s)
and an ADC delivers 8.

## Time: master clock, time offset and the channel queues

`master_clock` is a 48-bit counter. A start pulse clears it and it then
counts every clock. It keeps counting after the program's `END`, so entries
still waiting in queues play out. At 384 MHz it wraps after 2^48 clocks,
about 8.5 days.

Time tags in instructions are 28 bits and relative. The processor holds a
48-bit time offset `t_off`. It is cleared at start and advanced by `SYNCI n`.
A timed instruction `SET ch, ..., tag` enters channel `ch`'s queue with
absolute time `t_off + tag`. A program written as "pulse at 0, readout at
300, then `SYNCI 1000` and repeat" therefore needs no absolute times.

Each of the eight channels has:

* `sync_fifo`: a 16-entry first-word-fall-through queue of
  `{time, payload}`.
* `time_ctrl`: compares the head's time with the master clock. When
  `t_now >= time`, it pops the entry into a registered valid/ready output.
  An entry whose time has already passed (for example tag 0 at a late
  point) goes out at once.

The release rule is exact. An entry with time `T` that is already waiting
is presented in the clock after `t_now == T`. After that, the consumer's
own latency is fixed. A signal generator puts the first sample of the pulse
on the DAC 20 clocks after the entry enters its empty queue. That
20-clock minimum is the figure the reference firmware quotes. A `SET` into
a full queue stalls the processor until the time controller frees a slot.
This is the only way the output side can slow the program.

## The processor

`tproc` is a two-state machine (fetch, execute). Program memory has
one clock of read latency. Every instruction takes two clocks; `MEMR` takes
three. Waits add clocks. The processor has 32 registers of 32 bits, a
five-read-port register file (a `SET` gathers five registers into its
160-bit payload), an ALU, signed comparisons, an 8-deep stack, and a 4096 ×
32 data memory. The host also reaches the data memory through a second
port, which is where parameters go in and results come out.

Instruction word (64 bits):

| bits    | field |
|---------|-------|
| 63:56   | opcode |
| 55:53   | channel (`SET`) or readout port (`READ`, `WAITR`) |
| 52:48   | rd, or ra of `SET` |
| 47:43   | rs1, or rb of `SET` |
| 42:38   | rs2, or rc of `SET` |
| 37:34   | ALU op / condition (`SET`: 37:33 = rd register) |
| 32:28   | re register of `SET` |
| 31:0    | immediate (`SET`: 27:0 = time tag) |

| opcode | mnemonic | action |
|--------|----------|--------|
| 00 | `NOP`    | |
| 01 | `REGWI rd, imm` | rd = imm |
| 02 | `MATH op rd, rs1, rs2` | rd = rs1 op rs2 (ADD SUB AND OR XOR NOT SHL SHR ASR) |
| 03 | `MATHI op rd, rs1, imm` | rd = rs1 op imm |
| 04 | `MEMR rd, rs1, imm` | rd = dmem[rs1+imm] |
| 05 | `MEMW rs1, rs2, imm` | dmem[rs1+imm] = rs2 |
| 06 | `JUMP addr` | |
| 07 | `CONDJ c rs1, rs2, addr` | jump if rs1 c rs2 (EQ NE LT GT LE GE, signed) |
| 08 | `LOOPNZ rd, addr` | if rd≠0: rd--, jump |
| 09 / 0A | `PUSH rs1` / `POP rd` | stack |
| 0B | `SET ch, ra, rb, rc, rd, re, tag` | queue {ra..re} on channel ch at t_off+tag |
| 0C | `SYNCI imm` | t_off += imm |
| 0D | `WAITI imm` | wait until t_now ≥ t_off+imm |
| 0E | `READ rd, port, q` | rd = last I (q=0) or Q (q=1) sum of readout `port` |
| 0F | `WAITR port` | wait until readout `port` has a result not yet read |
| 3F | `END` | stop; master clock keeps running |

`qick_pkg` has a builder function for each instruction (`i_set`, `i_condj`
and so on). The testbenches assemble their programs with these.

**Feedback.** When a readout finishes a window, its I/Q sums arrive on a
feedback port and are latched, and a "new" flag is set. `WAITR` waits for
the flag. `READ` copies the I or Q sum into a register and clears the flag.
`CONDJ` then branches on it. The whole loop is:

1. The readout sum becomes valid.
2. `WAITR`, `READ` and `CONDJ` run, and the branch-dependent `SET`
   enters its queue 7 clocks later.
3. The time controller hands the entry to the generator 2 clocks after
   that.
4. The generator puts the first sample on the DAC 20 clocks later.

That is 29 fabric clocks from result to pulse. The reference firmware
measures 16 + 20 clocks for the same path.

**Start.** `start_src` selects between the host register `host_start` and
an external input `ext_start`. The rising edge of the selected signal, seen
while idle, clears `pc`, `t_off` and the master clock. The external input is
there so several boards can start together.

## Signal generator

`sig_gen` takes channel payloads from its queue. Each payload is one pulse:

| payload word | meaning |
|--------------|---------|
| r0 | DDS frequency (32-bit phase increment per DAC sample) |
| r1 | DDS phase (32 bits) |
| r2[15:0] | start address in the envelope table, in 16-sample words |
| r3[15:0] | gain, signed Q1.15 |
| r4[15:0] | length in fabric clocks (16 samples each) |
| r4[17:16] | `outsel`: 0 = envelope × carrier, 1 = carrier only, 2 = envelope only, 3 = zero |
| r4[18] | `mode`: 0 = one-shot, 1 = repeat until the next pulse is queued |
| r4[19] | `stdsel`: after the last pulse, 0 = hold the last sample, 1 = output zero |

The pipeline:

1. **Queue.** 16 entries, valid/ready towards the processor.
2. **`sg_ctrl`.** Pops a command when the current pulse ends, or right
   away if the generator is idle. It then steps the table address once per
   clock. In periodic mode it restarts the same pulse until another command
   is waiting.
3. **Alignment delay.** A fixed delay makes the total latency 20 clocks.
4. **`sg_table_mem` and `dds_lanes`.**
   * The table is 16 lanes × 4096 words of `{Q, I}`, 16 bits each: 65536
     samples per generator. It is loaded by `sg_data_writer`, which takes a
     start sample address and then a stream of samples.
   * The DDS produces 16 cos/sin values per clock.
5. **`sg_mix_switch`.** Computes the real part of the complex product,
   `I·cos − Q·sin`, and selects by `outsel`.
6. **`sg_gain`.** Multiplies by the Q1.15 gain and saturates.
7. **Idle stage.** Holds the last lane value or outputs zero while no pulse
   plays.

**Phase coherence** is the subtle part. The DDS keeps no running phase
accumulator. Instead the phase of lane `k` is computed every clock from the
master clock:

    phase_k = phase + freq · (16·t + k)   (mod 2^32)

This is the phase of a sine that has been running at that frequency since
master clock zero. Any two pulses of the same frequency, played at any
times and on any generator, lie on the same continuous wave. Switching to
another frequency and back loses nothing, and readout DDSs computed from the
same `t` stay locked to the generators. The phase is truncated to 10 bits
and looked up in a 1024-entry sine table. That table is computed at
elaboration with `$sin`, so there is no data file.

## Readout chain

`readout` is the chain for one ADC. The latency from ADC word to average
block is 5 clocks.

* **`ro_ddc`.** Multiplies the 8 ADC lanes by an 8-lane DDS:
  `I = x·cos`, `Q = −x·sin`. The DDS is computed from the master clock like
  the generator's. If its frequency is twice the generator's (the ADC runs
  at half the DAC rate), a looped-back tone comes out as a steady I/Q
  value. `cfg_outsel = 1` bypasses the mixer: `I = x`, `Q = 0`.
* **`ro_fir`.** An 8-tap low-pass filter across lane and clock boundaries:
  a boxcar with unit coefficients and `>>> 3`. The taps are a module
  parameter.
* **`ro_decim`.** Keeps one sample in eight: lane 7 of each clock. The
  result is one complex sample per clock, 48 MS/s.
* **`ro_average`.** A trigger in clock `c` opens a window. The sample of
  clock `c + 1 + offset` is the first summed and `length` samples are
  summed. The 32-bit I and Q sums appear for one clock, in the clock after
  the last sample. Triggers that arrive while a window is open are ignored.
  The block returns the sum; dividing by the length is left to software.
* **Two `ro_buffer` circular memories.**
  * The averaged buffer holds one `{Q, I}` 64-bit result per window, 1024
    entries.
  * The raw buffer holds every decimated sample taken inside a window, 1024
    entries, 32 bits. It is for debugging.
  * Both wrap, and their counts saturate at the depth. The host reads them
    through its ports and clears them with `cfg_clear`.
* **Feedback.** The sums also go to the processor's readout port.

Readout frequency, bypass, offset and length are host-side configuration
ports. In the reference system they are registers set from software before
a run.

## Digital outputs and triggers

`dig_io` is channel 0 of the processor. Each payload sets the 16 marker
outputs to bits 15:0 of its first word, and the levels hold until the next
payload. A rising edge on marker bit `r` gives readout `r` a one-clock
trigger. A program triggers a readout by queuing "bit r high" at the window
time and "bit r low" a few clocks later. The same marker can drive external
equipment.

## Top level

`qick_top` has:

* one `tproc` with its 4096 × 64 program memory;
* `dig_io` on channel 0;
* seven `sig_gen` on channels 1–7;
* two `readout` chains triggered by marker bits 0 and 1.

Host access is by plain ports. These are the program and data memory second
ports, envelope upload (per-generator write enables sharing one address and
data bus), readout configuration, buffer reads, and start control. The DAC
outputs are `dac_data[7][16]` and the ADC inputs `adc_data[2][8]`, 16-bit
signed.

Generic Yosys synthesis of the top gives about 7 k cells before
technology mapping and 21.7 k flip-flop bits. It has about 19.5 Mbit of
memory: mostly the envelope tables (7 × 64 k × 32 bits), then the program
and data memories and the readout buffers.

## Where this model departs from the reference firmware

* **Instruction set.** The processor's instruction set, encoding, register
  count, queue and stack depths, and the `WAITR`/`READ` feedback mechanism
  are this design's own. The reference processor's assembly language is
  only outlined (looping, branching, register access, timed output,
  readback).
* **Branch latency.** A conditional branch here costs 2 clocks. The
  reference measures 16 clocks for "conditional evaluation and address
  jump". The difference is in the unpipelined reference processor, not in
  the function.
* **Readout filter and sums.** The filter is a plain boxcar. The average
  block returns sums, not means.
* **Readout windows.** There is one window per readout at a time, set by
  offset and length ports. Multiplexed readout of several tones on one ADC
  would need more readout chains per ADC.
* **Generator and table sizes.** The generator count (seven plus the marker
  channel, filling the processor's eight channels) and the table, memory
  and buffer depths are sizes chosen here.
* **Outside this RTL.** The ARM processing system, the AXI/DMA engines, the
  RFSoC data converters with their own interpolation, decimation and
  mixers, and everything on the RF board (mixers, LOs, bias DACs, clocking)
  are not part of this RTL. Their connection points are the top-level
  ports.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`;
`sg_ctrl` is tested inside `tb_sig_gen`). Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Expected values come
from models written in the testbench, not from the RTL:

* **Generator (`tb_sig_gen`).** A sample-exact model of the pulse stream:
  table contents, DDS phase from the master-clock formula, switch and gain.
  It also checks the 20-clock latency, periodic repeats and both idle modes.
* **Processor (`tb_tproc`).** A program that uses every instruction. It
  checks every channel output against its expected payload and release
  clock, and checks a queue-full stall, back-pressure, `WAITI`, and
  feedback branching in both directions. It runs twice, once from each
  start source.
* **Readout (`tb_readout`).** Exact window sums and timing in bypass mode
  and in downconversion mode, plus buffer contents and clearing.
* **Top (`tb_qick_top`).** The whole design at its default sizes, with
  DAC 0/1 looped back to ADC 0/1 in the testbench. It:
  * loads envelopes and a program;
  * plays pulses and triggers readouts by markers;
  * branches on a strong and a weak measured pulse;
  * downconverts a DDS tone at the matching frequency, which is where phase
    coherence shows: I is large and Q is small;
  * runs a periodic pulse that is then replaced by a held one-shot;
  * overfills a queue;
  * plays a mixed pulse.

  It counts each of these mechanisms and fails if one never happened. It
  runs in seconds.
* **Feedback latency (`tb_feedback_latency`).** A readout pulse is looped
  back and integrated, and the program branches on the result to play an
  answer pulse. The testbench measures the latency of each stage. It checks
  that the branch is taken for a strong pulse and not for a weak one.
* **Rabi sweep (`tb_rabi_sweep`).** A workload run through the whole design.
  It sweeps the amplitude of a 100 ns Gaussian pulse (σ = 25 ns, 615
  samples at 6.144 GS/s) over ten shots, one every 200 clocks. The envelope
  is computed in the testbench. Each loop-back readout sum is compared with
  an exact model of the generator, filter and decimator.
* **Shot loop (`tb_shot_loop`).** 3000 shots, the number used per point of
  the randomized-benchmarking run, one every 60 clocks. Each shot plays a
  readout pulse, waits for its result, stores it in data memory and adds it
  to a running total; a conditional jump steps the gain through 16 values.
  All 3000 stored results, the total, and the averaged buffer after it has
  wrapped almost three times are compared with the exact values.

To run one test with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/qick_pkg.sv tb/tb_qick_top.sv
    ./obj_dir/Vtb_qick_top

Use `+verilator+rand+reset+2` to start uninitialised state at random values.
Everything that is read is reset or written first, so results do not depend
on it.

The RTL uses packages, packed structs, enums, typed and type parameters, and
concurrent assertions for the handshake and queue rules. It passes Verilator
lint and the slang front end of Yosys.
