# Mixed-signal acquisition logic for optically detected magnetic resonance

Spin experiments on nitrogen-vacancy (NV) centres in diamond read the spin state out
as fluorescence. A spin ensemble gives a photodiode current, which is an analog signal.
A single spin gives a train of photon pulses from an avalanche photodiode, which is a
digital signal. Either way, the result of one experimental point is the signal inside
a *detection window*. The window sits at a fixed delay after a trigger and lasts a
fixed time. The point is then repeated many times to average out noise.

This RTL is the programmable-logic half of a small FPGA data-acquisition system
(a Zynq-7010 class device, 125 MHz) built for that job. It has two halves:

* **SAP, synchronized acquisition and processing.** It takes two 14-bit analog
  inputs at 125 MS/s and one photon-pulse input. Every detection window becomes one
  128-bit packet: the sum of the analog samples, the number of photons, and the
  packet's place in the experiment.
* **MSG, multiplex signal generator.** It has two output channels on a 14-bit dual
  DAC. Each channel gives either a DDS waveform (sine, square, triangle or sawtooth)
  or a PWM pulse train with 8 ns resolution. Channel 0's pulse can also trigger the
  acquisition, so one board can both pace and record an experiment.

A processor sets everything over a register bus and receives the packets as a
128-bit valid/ready stream, for its DMA. That processor runs the network link to
the host PC. The processor, DMA, DDR memory, converter chips and host software are
outside this RTL. The top level brings their connections out as ports.

Everything runs in one clock domain. One clock cycle is one 8 ns ADC sample.

```
 adc_a/adc_b ──► adc_frontend ──► ai[2] ─┐
                                         ▼
 di[0] CH1 trig ──►┌───────────────────────────────────────────┐
 di[1] CH2 trig ──►│ sap                                       │
 di[2] photons ───►│  per channel: trig_window → sample_fifo   │
 do_pwm[0] ───────►│     → sap_accum → packet FIFO             │──► m_axis_* (128 bit)
                   │     (seq_ctrl supplies the point/repeat   │
                   │      indices; photon_counter on CH1)      │
                   │  round-robin merge ─► stream or cont_buffer│
                   └───────────────────────────────────────────┘
 gpio_* ◄──► ctrl_regs ──► settings, strobes
                       └─► msg: 2 × (dds + pwm_gen) ──► dac_a/dac_b, do_pwm[1:0]
```

## Detection windows

Each analog channel has its own `trig_window`. The trigger source is chosen per
channel:

* the channel's own digital input (`di[0]` for CH1, `di[1]` for CH2), through a
  two-flop synchroniser;
* MSG channel 0's PWM pulse;
* a software strobe from the command register.

A rising trigger edge starts a delay of **D** cycles. The window then stays open for
**W** cycles. If the edge is seen in cycle *t*, the window covers cycles
*t+D+1 … t+D+W*. For the external inputs, *t* is the cycle in which the edge leaves
the synchroniser, two cycles after the pin.

D and W are 32-bit cycle counts, so each can reach 2^32 × 8 ns = 2^35 ns, about 34 s.
A W of 0 is treated as 1. Triggers that arrive during a delay or a window are
ignored: the windows of one channel never overlap. A channel accepts triggers only
while `run` is set and its sequence is not finished.

The same window gates the photon counter, so both quantities cover the same time.
The counter is attached to CH1's window. CH1 packets carry the photon count. CH2
packets carry 0 in that field.

## From samples to a packet

**ADC coding.** The ADC delivers offset binary, 0x0000 to 0x3FFF. `adc_frontend`
maps it to two's complement and inverts it: raw 0 becomes +8191 and raw 0x3FFF
becomes −8192, that is, 8191 − raw. It then subtracts the channel's signed bias word
and saturates to −8192 … +8191. One LSB is 2 V / 16384 ≈ 0.122 mV. The bias
register removes the slow offset of the analog front end, which drifts with
temperature by about 1 mV over 30 °C. The latency is two cycles, and both channels
stay aligned.

**Sample FIFO.** Each sample inside a window is pushed into a 16-deep
first-word-fall-through FIFO. It carries a 15th bit that marks the window's last
sample. The FIFO separates the window timing from the accumulator. The accumulator
pops one word per cycle, so the FIFO never fills in normal use. If it does
overflow, a sticky flag reports it.

**Accumulator.** `sap_accum` adds the popped samples into a 48-bit signed sum. That
is one DSP48 accumulator, and it cannot overflow even for a window of 2^32
full-scale samples. On the word marked *last* it builds the packet. One cycle later
it clears the sum and steps `seq_ctrl`. A window's packet enters the channel's
packet FIFO about three cycles after the window's last cycle.

**Packet layout** (`daq_pkg::pkt_t`, 128 bits, most significant first):

| bits      | field      | meaning                                            |
|-----------|------------|----------------------------------------------------|
| 127       | `chan`     | 0 = CH1, 1 = CH2                                   |
| 126:112   | `point`    | experimental point, 0 … N−1                         |
| 111:96    | `s_idx`    | sweep repeat, 0 … S−1                               |
| 95:80     | `r_idx`    | point repeat, 0 … R−1                               |
| 79:32     | `ai_sum`   | signed sum of the corrected samples in the window  |
| 31:0      | `di_count` | photon edges in the window (CH1; 0 on CH2)          |

The host divides `ai_sum` by W to get the mean voltage.

## Sequence pattern

An experiment is a list of **N** points, for example N microwave frequencies. Each
point is measured **R** times in a row. The whole list is run **S** times. R is the
inner loop. With N=3, R=2, S=2 the windows are labelled:

```
point  0 0 1 1 2 2 0 0 1 1 2 2
r_idx  0 1 0 1 0 1 0 1 0 1 0 1
s_idx  0 0 0 0 0 0 1 1 1 1 1 1
```

`seq_ctrl` keeps these three counters per channel and advances them once per
packet. A 0 in N, S or R counts as 1. After N·R·S windows:

* the channel sets its `done` bit;
* it stops arming, so later triggers produce nothing;
* its last packet carries `tlast` on the stream.

A `start` strobe clears the counters and the done bits for the next run.

In this pattern the packets go straight to the output stream. The two channels'
packet FIFOs (16 packets each) are merged round-robin, so neither channel can
starve the other. Back-pressure on `m_axis_tready` stalls the merge. If a packet
FIFO is still full when a new packet arrives, that packet is dropped and the sticky
`overflow` status bit is set. Nothing else stalls: the acquisition itself is never
held up.

## Continuous pattern

Some measurements need an unbroken record rather than a repeated sequence. Examples
are watching an offset drift or recording a slow modulation. With the `continuous`
bit set:

* the windows run without end;
* the sequence counters wrap instead of finishing;
* every merged packet is written into `cont_buffer`.

`cont_buffer` is a circular memory of 4096 × 128 bits, 64 KB of block RAM. It
always holds the newest 4096 packets.

A *read command* sets the buffer busy:

* it freezes writing;
* it streams the newest **M** packets to `m_axis_*`, oldest first, with `tlast` on
  the M-th;
* packets that arrive meanwhile are dropped and counted, and they set `overflow`.

A packet that arrives in the very cycle of the read command is still written. It
becomes the newest packet of the read-out.

After the read-out, cyclic writing resumes. M is 1 … 4096. A value of 0, or one
larger than the number of packets written since reset, returns everything held. The
first packet appears two cycles after the command. After that, one packet per cycle
is sent while the receiver is ready.

While the continuous pattern is active, nothing reaches the stream except these
read-outs.

One packet is stored per window, not per sample. With W=1 and D=0 a channel can open
a new window every second cycle, so the finest continuous record is 62.5 M packets/s
per channel.

## Signal generator

Each of the two MSG channels has a `dds` and a `pwm_gen`. A mode bit chooses which
one drives the channel's DAC word. That makes each output a "hybrid" channel: the
same DAC pin carries either an RF waveform or pulses.

**DDS.** A 48-bit phase accumulator steps by the tuning word each cycle:

f = ftw · 125 MHz / 2^48 (resolution 0.44 µHz, range up to 62.5 MHz)

The width is chosen so that very slow modulation tones come out exact. A 0.1 Hz tone
is ftw = 225180. A 32-bit accumulator would land on 0.087 Hz or 0.116 Hz instead. A
32-bit phase offset is added to the top of the phase, with 2^32 being one full turn.
The top 12 phase bits address a sine of 4096 points per period. That sine comes from
a 1024-entry quarter-wave table (13 bits of magnitude), mirrored and negated for the
other three quadrants. The table is computed at elaboration as
round(8191 · sin(2π(i+½)/4096)), so no data file is needed.

Square, triangle and sawtooth are formed directly from the phase. The result is
multiplied by `amp` and shifted right by 13, so the gain is amp/8192, clamped at
unity. The latency is three cycles from accumulator to sample. The DAC register
adds one more.

**PWM.** A 32-bit counter runs from 0 to period−1. The output is high for its first
`high` cycles. Both numbers are in 8 ns steps and can reach 34 s. For example, a
20 ms period with duty 0.8 is period 2,500,000 and high 2,000,000. With `pwm_en`
low the counter is held at 0 and the output is low. In PWM mode the DAC word is
+amp while the pulse is high and −amp while it is low.

**DAC coding.** The DAC words are offset binary, which is two's complement with the
sign bit inverted, as a straight-binary 14-bit DAC expects. After reset they rest at
mid-scale.

## Register map

The processor reaches the logic through a simple bus:

* 8-bit word address `gpio_addr`;
* 32-bit `gpio_wdata`;
* one-cycle write strobe `gpio_we`;
* `gpio_rdata`, which reads back combinationally.

Every setting can be read back.

| address | name         | contents                                                                 |
|---------|--------------|--------------------------------------------------------------------------|
| 0x00    | CTRL         | [0] run (arm triggers), [1] continuous pattern                           |
| 0x01    | CMD          | write-1 strobes: [0] start, [1] software trigger CH1, [2] software trigger CH2, [3] buffer read command |
| 0x02–0x05 | N, S, R, M | sequence sizes (16 bit) and read length (13 bit)                        |
| 0x06    | STATUS (ro)  | [1:0] sequence done CH1/CH2, [2] read-out busy, [3] overflow, [5:4] window open CH1/CH2 |
| 0x10+4c | AI c         | +0 trigger source (0 external, 1 MSG pulse, 2 software), +1 D, +2 W, +3 bias (signed 14 bit) |
| 0x20+8c | MSG c        | +0 {shape[3:2], pwm_en[1], pwm_mode[0]}, +1 PWM period, +2 PWM high, +3 ftw[31:0], +4 phase offset, +5 amp, +6 ftw[47:32] |

Values after reset: N = S = R = 1, M = 4096, W = 1, and everything else 0. The
generators are therefore off and the DAC words sit at mid-scale.

A typical sequence run:

1. Write the AI and MSG settings and N, S, R.
2. Set CTRL.run.
3. Write CMD.start.
4. Drain the stream until the `tlast` of each channel.

## Sizes against the published experiments

* **cw-ODMR of an ensemble.**
  * 1000 points; 16 ms windows (2,000,000 cycles).
  * Paced by MSG pulses of 20 ms period and duty 0.8.
  * All of these fit the 32-bit timers and the 15-bit point field. The window sum
    stays below 1.7·10^10, far inside 48 bits.
* **Rabi oscillation.** The same 16 ms windows on external triggers.
* **Lock-in detection of a single spin.**
  * A 0.1 Hz sine of 1.72 Vpp (amp ≈ 7045 of 8192, taking about 2 Vpp as full
    scale) modulates the microwave frequency.
  * The photon counts are recorded at the same time.
  * Five modulation periods fit the continuous buffer with windows of about 12 ms.
* **Bias correction.** The measured offsets of 0.12 to 1.3 mV are 1 to 10 LSB, well
  inside the bias register.

## Where this design makes its own choices

The published system gives:

* the block structure;
* the 125 MHz clock and 14-bit converters;
* the D/W window with its 2^35 ns limit, and the sample FIFO;
* the 128-bit packet width, and processing in DSP slices;
* the N/R/S order, with R before S;
* the 64 KB buffer and M ≤ 4096;
* the ADC sign convention and bias correction;
* DDS and PWM with 8 ns resolution, and the list of waveform shapes.

It leaves open everything below, which is decided here:

* the packet field layout and the 48-bit accumulator width;
* the register map and bus;
* the trigger-source choice, including the software trigger;
* the 16-deep FIFOs, the round-robin merge and the drop-on-full policy;
* `tlast` placement;
* one packet per buffer entry;
* the DDS width, table size and waveform formulas;
* the PWM-on-DAC levels;
* the DAC coding;
* reset values.

Also decided here:

* **Photon counter on CH1 only.** It is tied to CH1's window, and photon edges are
  counted after a two-flop synchroniser and an edge detector.
* **Windows per channel.** The two analog channels have independent windows and
  sequences. When both use the same trigger, D and W, their packets carry matching
  indices.
* **`win_out` monitor.** The top brings out the window flags as `win_out`, for
  scopes and test. This port is an addition.
* **Processor-side parts are ports.** The processor's UDP server, the DMA engine,
  the AXI GPIO block and DDR are represented only by the GPIO bus and the packet
  stream. The ADC and DAC chips are represented by the plain data words. Their clock
  and data-interface timing is not modelled.

## Verification

Every module in `rtl/` has a self-checking testbench in `tb/`. Each one:

* compares the module against a model computed independently in the testbench;
* prints `TB_RESULT checks=… failures=…`;
* stops itself with a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_adc_frontend` | coding, bias, saturation at both rails, 2-cycle latency |
| `tb_trig_window` | window start and length against D, W and the trigger cycle for all three sources; retriggers ignored; arming |
| `tb_photon_counter` | random pulse trains counted only inside the window; count timing |
| `tb_sample_fifo` | random push/pop against a queue; full, empty, overflow flag |
| `tb_sap_accum` | sums, packet fields and the photon-count hand-over for random windows |
| `tb_seq_ctrl` | index order for many N, R, S including 0; done; continuous wrap |
| `tb_cont_buffer` | wrap, newest-M read-out, oldest-first order, M=0 and M > filled, stalls, drops, a write in the command's cycle |
| `tb_dds` | every shape, amplitude, phase offset and rate (up to just below 62.5 MHz and down to 0.1 Hz) against an ideal-phase model; sine error ≤ 7 LSB |
| `tb_pwm_gen` | high and low times over many periods and duties |
| `tb_msg` | DAC coding, DDS/PWM mode switch, pulse levels |
| `tb_ctrl_regs` | write and read-back of every register, strobes, status |
| `tb_sap` | both patterns with a small buffer: packets, indices, merge, stalls |
| `tb_odmr_daq_top` | end to end at full size (see below) |

`tb_odmr_daq_top` drives only the top-level ports. It runs four phases:

1. A sequence run with N=4, R=3, S=2, with CH1 on MSG pulses and CH2 on external
   triggers, under random back-pressure.
2. Software triggers.
3. A continuous run that wraps the full 4096-packet buffer. It is read out with
   M = 4096 and then M = 100.
4. A forced overflow.

Each packet is checked against a model of the ADC coding, the window sums, the
photon counts and the sequence indices. The test also checks that channel 1's
10 MHz sine crosses zero as expected and that channel 0's DAC word follows its
pulse. It counts every mechanism (external, PWM and software triggers; sequence
done; buffer wrap; read-out; stalls; drops; overflow) and fails if any of them never
happened. It runs at the default sizes in a few seconds.

`tb_odmr_workloads` runs the two published experiments on the whole design, also
at the default sizes. It takes about 10 million cycles, about 10 s.

* **cw-ODMR at the real timing.**
  * Pulses of 2,500,000 cycles with 2,000,000 high, which is 20 ms at duty 0.8.
  * Windows of 2,000,000 cycles on CH1.
  * Three microwave points, with a fluorescence dip at the middle one.
  * Checked: pulse period and duty, window length, and the window's fixed offset
    from the pulse.
  * Also checked: every packet. The sums exceed 2^32, so the wide accumulator is
    exercised. It also checks that the dip appears.
* **Lock-in.**
  * MSG channel 1 gives a sine at amplitude 7045/8192, looped back into CH2.
  * The photon rate on the counting input follows that sine.
  * Both channels are windowed by the same pulses in the continuous pattern, and
    4096 packets are read out.
  * The photon counts must correlate with the acquired modulation at zero lag, and
    not at a quarter period.
  * The modulation period is shortened to 40,960 cycles. A 0.1 Hz period is 1.25
    billion cycles, which only the tuning word would change.

To run any testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv rtl/daq_pkg.sv tb/tb_sap.sv --top-module tb_sap
./obj_dir/Vtb_sap
```

Some testbenches override sizes to keep them short:

* `tb_sample_fifo` uses a depth of 8;
* `tb_cont_buffer` and `tb_sap` use a 16-entry buffer.

Synthesised at full size, the top needs about 1,700 flip-flop bits and about 555,000
memory bits. Of those memory bits, 524,288 are the 64 KB buffer. The rest are the two
sine tables and the FIFOs.
