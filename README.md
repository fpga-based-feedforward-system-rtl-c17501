# Real-time feedforward fabric for pulsed continuous-variable optics

In measurement-based quantum information processing with continuous-variable
light, every homodyne measurement of one optical mode leaves a known,
outcome-dependent displacement on modes that have not been measured yet. A
correction has to be computed and applied before those modes reach their own
modulators, so the electronics sit in a latency budget of roughly 200 ns. The
correction is linear: for a pulse train at 10 MHz, each new measurement result
`m` updates a vector of the last 80 results, and the displacement to apply is
the pair of inner products

    x = A_x(n) · m        p = A_p(n) · m

with a fresh pair of 80-element coefficient vectors `A_x(n)`, `A_p(n)` for
every pulse `n`. The pair `(x, p)` is a point in phase space. It is applied
by an intensity modulator (IM), driven with the magnitude `sqrt(x² + p²)`, and
a phase modulator (PM), driven with the angle `atan2(p, x)`.

This repository holds synthesizable SystemVerilog for the FPGA-fabric part of
such a feedforward system, designed after the system of Fig. 1 of "FPGA Based
Feedforward System for Photonic Quantum Computing Applications". It runs on a
250 MHz fabric clock, takes four 12-bit ADC samples per cycle (1 GS/s), and
drives a dual 12-bit DAC. The A-vectors are far too many to keep on chip:
80,000 per side for 8 ms of measurement. They stream in from DDR memory
through a DMA engine. The processor, the DMA engine, the DDR memory, the
converters and the clocking primitives are not part of this RTL. They appear
as ports of the top module `ff_top`.

## The pipeline

One optical pulse slot is 100 ns, which is 25 fabric cycles. The chain, in
order:

| Block | Module | What it does | Cycles |
|---|---|---|---|
| Trigger | `otrig` | Modulo-25 counter. Makes the internal pulse trigger `o_trig_i`, the laser trigger `o_trig_o` (which rises earlier, see below), and the sample/hold signal `meas_lock_o`. | – |
| M-extractor | `m_extractor` | Weighted sum of 100 ADC samples, one 12-bit m-value per pulse | 25 |
| M-vector | `mvec_sreg` | Shift register of the last 80 m-values | 1 |
| A-vector stream | `stream_avec` | Asynchronous FIFO, DMA clock (300 MHz) to fabric clock | – |
| Mux X/P | `mux_xp` | Steers each DMA burst to the x or the p buffer | – |
| A-vector buffers | `avec_bram` ×2 | 4096-vector FIFOs that ask the DMA for 1024-vector bursts | 1 (read) |
| Multiplier | `vec_mult` ×2 | 80 products of 12 × 12 bits | 1 |
| Summer | `vec_sum` ×2 | Adder tree, 80 × 24 bits to 32 bits | 4 |
| Scale conversion | `scale_conv` ×2 | Picks 13 of the 32 bits: shift, round, saturate | 1 |
| CORDIC | `cordic` | (x, p) to magnitude and phase | 8 |
| PM Adjust | `pm_adjust` | Makes the IM and PM codes, with phase compensation and gain | 3 |
| Ring buffer | `ring_buffer` | Programmable output delay, then one word per 100 ns | 2 (+ Wait_Config) |
| DAC interface | `dac_if` | Registers the codes; strobes `dac_wrt`, then `dac_clk` | 1 |
| Configuration | `config_reg` | AXI4-Lite register file | – |

Latency: the first ADC sample of a pulse reaches `dac_wrt` 47 cycles (188 ns)
later, plus Wait_Config cycles. The test benches check this exactly for every
output word. Over half of the latency is the M-extractor, which cannot finish
before the last of its 100 samples has arrived. The published system measures
196 ns end to end. That figure includes the ADC and DAC conversion times,
which lie outside the fabric.

Shared widths and constants live in the package `ff_pkg`. This includes the
configuration struct `cfg_t` that the register file hands to the fabric.

## Pulse timing and the M-extractor

`otrig` is the master clock of the experiment. `o_trig_i` is high for one
cycle in every 25. The laser trigger `o_trig_o` rises O_trig_Delay cycles
before it (1 to 24 cycles, i.e. 4 to 96 ns). This covers the pulse generator,
cables and ADC pipeline, so the light arrives at the ADC just as the
M-extractor window opens.

The M-extractor computes

    m = Sat12( (Σ_{i=0..99} w_i · h_i) >>> 8 )

- `h_i`: the ADC samples.
- `w_i`: 100 signed 8-bit weights, so w/256 spans −0.5 to 0.5.
- Arithmetic: four samples per cycle, each multiplied by its weight and added
  to an accumulator.
- Window start: Trig_Start cycles after `o_trig_i`.
- Window length: Trig_Window cycles, 25 by default. It is shortened when
  needed so that the window ends inside the 25-cycle slot. Otherwise the next
  trigger would restart it before it had finished.
- Output: `m_valid` pulses in the cycle after the last window cycle.
- Sample order: bits [11:0] of the 48-bit ADC word are the earliest sample,
  in two's complement.

The reset weights are [64, 64, 64, 64, 0, …]: the mean of the first four
samples at unit gain.

## Sample/hold sequencing and when a calculation happens

Optical experiments of this kind alternate between two phases:
- a *sample* phase, in which optical phase locks are active;
- a *hold* phase, in which the locks are frozen and data is taken.

`meas_lock_o` is low in the sample phase and high in the hold phase. The
period is counted in pulses: MEAS_LOCK_PERIOD pulses in total (default
100,000 = 10 ms). The first MEAS_LOCK_DUTY of them (default 20,000 = 2 ms)
are the sample phase.

The top decides per pulse:

1. **Tagging.** The M-extractor samples `meas_lock_o` when the pulse's
   trigger comes, and returns it with the m-value. A pulse therefore belongs
   to the phase in which it was triggered, even though its m-value is ready
   25 cycles later.
2. **Gating.** m-values of sample-phase pulses are dropped. Hold-phase
   m-values are shifted into the m-vector.
3. **Fill.** Nothing is calculated until the m-vector holds 80 values. In a
   hold phase of N pulses this gives N − 79 calculations.
4. **Consumption.** Each later hold-phase pulse reads one Ax and one Ap
   vector in the same cycle, and the two results stay paired through the
   pipeline. If either buffer is empty, no result is produced for that pulse.
   The sticky `calc_miss` flag is set, and the side that was empty is read
   anyway, which sets that buffer's underrun flag. The other side is not
   read, so x and p stay aligned by vector index.

The m-vector is not cleared between periods. The processor can restart the
A-vector sequence by reloading the DMA.

## Feeding the A-vectors

Each A-vector is 960 bits: 80 signed 12-bit values, element k at bits
[12k+11:12k]. Element 79 multiplies the newest m-value.

- **Bursts.** Each `avec_bram` holds 4096 vectors. Whenever its free space,
  minus what it has already asked for, is at least 1024 vectors, it pulses
  `read_burst_x` or `read_burst_p` for one cycle. The processor answers by
  starting a 1024-vector DMA transfer of the right side.
- **Clock crossing.** The stream arrives on the 300 MHz DMA clock and passes
  through `stream_avec`, a 16-deep asynchronous FIFO. Its pointers cross the
  clock boundary in Gray code through two-flop synchronisers.
- **Steering.** The CTRL register's Mux X/P bit selects the destination. The
  processor sets it before it starts the transfer. `mux_xp` samples the bit
  at the first beat of each burst and holds it for the whole burst, so a
  burst that is still draining through the clock-crossing FIFO cannot be
  split between the buffers.
- **Back-pressure.** A full buffer back-pressures the stream through the
  AXI4-Stream `tready`.
- **Rates.** The DMA delivers about one vector per fabric cycle. The
  calculation consumes one vector per side every 25 cycles. The buffers
  therefore refill far faster than they drain, and an experiment of any
  length runs from a 4096-vector buffer per side.

## Number formats

| Quantity | Format | Notes |
|---|---|---|
| m-value, A-value | signed 12-bit, read as 1.11 | −1 … +1 |
| Product / sum | 24-bit / 32-bit signed | exact |
| Scale output x, p | 13-bit signed, 2.11 | `Sat13((s + 2^(k−1)) >>> k)`, k = Scale_Select; k = 11 is unit gain |
| CORDIC magnitude | 13-bit, 2.11 | clipped at 4095 |
| CORDIC phase | 13-bit signed, 3.10 | ±1.0 = ±π |
| PM Comp | signed 11-bit, 0.10 | amplitude-to-phase coupling of the IM |
| PM Gain | signed 11-bit, 2.9 | 512 = 1.0 |
| IM code (DAC A) | 12-bit unsigned, 1.11 | magnitude with its sign bit dropped |
| PM code (DAC B) | 12-bit unsigned, 2.10 + offset | code = 1024 + 1024 · gain · (phase/π + comp · magnitude) |

Scale_Select is the feedforward gain: it chooses which 13 of the 32 sum bits
reach the CORDIC. Rounding is to nearest, with ties rounded up, and the
result saturates.

The CORDIC is a vectoring-mode design.
- A first stage folds the left half-plane onto the right one.
- Twelve micro-rotations follow, two per register stage. The magnitude is
  then multiplied by 1/K = 0.60725.
- Accuracy: the magnitude is within 1 LSB. The phase is within 1 LSB for
  vectors at least 32 LSB long. For shorter vectors, the phase error is
  bounded by the angle one input LSB subtends.

**PM Adjust** follows a fixed-point schematic of six steps:

1. **PH.** Convert the phase to 2.11.
2. **PM0/PM1.** Multiply the magnitude by PM Comp (2.21), then shift back
   to 2.11.
3. **PM2.** PH + PM1, the compensated phase, in 2.11. Its range is ±2,
   which is ±2π. The doubled range leaves room for the compensation term. A
   sum beyond ±2 wraps by two full turns, so it still points the same way.
4. **PM3.** Multiply by PM Gain, giving 4.20.
5. **PM4.** Shift by 9, then cut to 2.11.
6. **PM5.** Round to 2.10 and add 1024.

The code is unipolar, so 0 rad is code 1024, +π is 2048 and −π is 0.

Examples:

| Phase | Code |
|---|---|
| 45° | 1280 |
| −135° | 256 |

PM Gain compensates for the unknown V_π of the modulator and its amplifier.
The published system needed a gain of 0.687, which is code 352.

## Output delay and DAC strobes

The ring buffer (64 words of {IM, PM}) lets the correction wait for the
optical pulse it belongs to, which is travelling through a delay line.
- The first write after the buffer has been idle starts a wait of Wait_Config
  cycles (0 to 1000, i.e. up to 4 µs, in 4 ns steps).
- After the wait, one word is read every 25 cycles in write order, until the
  buffer is empty.
- The first read comes Wait_Config + 1 cycles after the write.
- A write to a full buffer is dropped and sets a sticky overflow flag.
  `near_full` is high from 56 words up.

`dac_if` puts the codes on the DAC buses and pulses `dac_wrt`. Cfg_Clk_Dly
cycles later (0 to 7) it pulses `dac_clk`, so the conversion edge can be
placed against the data in 4 ns steps. After reset the buses hold A = 0 (no
light) and B = 1024 (0 rad).

## Register map

32-bit registers on an AXI4-Lite slave in the fabric clock domain (8-bit byte
address). Unmapped addresses read as 0.

| Address | Name | Bits | Reset | Meaning |
|---|---|---|---|---|
| 0x00 | CTRL | [0] | 0 | Mux X/P: 0 = next DMA burst to Ax, 1 = to Ap |
| 0x04 | O_TRIG_DELAY | [4:0] | 1 | cycles `o_trig_o` leads `o_trig_i` (1–24) |
| 0x08 | MEAS_LOCK_PERIOD | [25:0] | 100000 | pulses per sample/hold period |
| 0x0C | MEAS_LOCK_DUTY | [25:0] | 20000 | pulses of the sample phase |
| 0x10 | TRIG | [4:0], [12:8] | 0, 25 | Trig_Start, Trig_Window (cycles) |
| 0x14 | SCALE_SELECT | [4:0] | 11 | right shift of the inner product |
| 0x18 | PM_COMP | [10:0] | 0 | signed 0.10 |
| 0x1C | PM_GAIN | [10:0] | 512 | signed 2.9 |
| 0x20 | WAIT_CONFIG | [9:0] | 0 | output delay, cycles |
| 0x24 | CFG_CLK_DLY | [2:0] | 0 | `dac_clk` delay after `dac_wrt`, cycles |
| 0x28 | STATUS | read-only | – | see below |
| 0x40 + 4i | WEIGHTS | 4 × [7:0] | 64,64,64,64,0… | weights 4i … 4i+3, weight 4i+b in bits [8b+7:8b], i = 0…24 |

STATUS bits:

| Bits | Meaning |
|---|---|
| [0] | `meas_lock_o` |
| [1] | an Ax burst was requested since reset (sticky) |
| [2] | x underrun (sticky) |
| [3] | p underrun (sticky) |
| [4] | calculation missed (sticky) |
| [5] | ring buffer near full |
| [6] | ring buffer overflow (sticky) |
| [7] | m-vector full |
| [31:16] | calculations done, wrapping |


## Where this design departs from the published system, and its own choices

- **CORDIC.** The published system uses a vendor CORDIC core. The one here
  is written from scratch (see Number formats). The total latency therefore
  differs from the published one by the difference in core latency.
- **PM Adjust formats.** The published schematic labels the compensated
  phase PM2 as "2.21" and the final offset as "+2". Neither fits the steps
  after them: the 4.20 product that follows only works with a 2.11 PM2, and
  the text adds 1024. This design uses 2.11 and +1024. It also wraps PM2
  modulo two turns. The schematic shows no saturation, so none is added.
- **Output delay range.** One figure caption gives 0–96 µs for the ring
  buffer delay. The text, and the 64-entry buffer, give about 4 µs. 96 µs
  would need 960 entries. This design follows 4 µs.
- **M-extractor window.** The published system names Trig_Start and
  Trig_Window but does not define them. Here they are an offset and a length
  in cycles, with the window clamped to the pulse slot.
- **Meas_Lock.** The polarity (high = hold) and the order (sample phase
  first) are chosen here.
- **Pulse tagging.** Tying each m-value to the Meas_Lock state at its
  trigger is this design's solution to the phase boundary.
- **Bursts and steering.** The burst request rule (request whenever 1024
  unpromised slots are free) and the per-burst Mux X/P sampling are this
  design's choices.
- **Enable chain.** The published system synchronises its entities through
  a chain of enable ports. Here every stage hands its result to the next with
  a one-cycle valid strobe, which serves the same purpose.
- **Interfaces and register map.** The register addresses, the STATUS word,
  the AXI4-Lite slave and the DAC strobe scheme are this design's own.
- **Sizes this design chooses.** The published system does not give these:
  - the clock-crossing FIFO depth of 16;
  - the ring buffer near-full threshold of 56;
  - the `o_trig_o` pulse width;
  - the rounding modes.
- **Outside the RTL.** The processor software, the DMA engine and DDR, the
  ADC deserialiser (SERDES/GTH), the MMCM/PLL clock plan, the level shifters,
  the converters and the optics are not included.

## Verification

Every module has a self-checking test bench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Test bench | What it checks |
|---|---|
| `tb_otrig` | trigger period, O_trig_Delay lead, Meas_Lock period/duty |
| `tb_m_extractor` | random weights and data against a reference sum; random Trig_Start/Window; saturation; tag |
| `tb_mvec_sreg` | shift order, `full`, clear |
| `tb_stream_avec` | ordering and loss-free transfer across unrelated clocks, random stalls on both sides |
| `tb_mux_xp` | burst routing, a select change during a burst, back-pressure |
| `tb_avec_bram` | burst requests, levels, underrun, read latency |
| `tb_vec_mult`, `tb_vec_sum`, `tb_scale_conv` | exact arithmetic, latency, rounding, saturation |
| `tb_cordic` | against real `sqrt`/`atan2`, all quadrants and axes |
| `tb_pm_adjust` | against a real-number model, with fixed anchor codes |
| `tb_ring_buffer` | Wait_Config timing, 25-cycle read rate, overflow, near full |
| `tb_dac_if` | bus values, `dac_clk` delay |
| `tb_config_reg` | AXI4-Lite handshakes, reset values, every register |
| `tb_ff_top` | whole design, default parameters (see below) |
| `tb_ff_workload` | the two published system tests at default parameters (see below) |

**`tb_ff_top`** runs 3500 pulses through the whole design. It drives the
register interface, a DMA model with random gaps on the 300 MHz clock, and a
processor model that answers burst requests and sets Mux X/P. Every DAC word
is compared with an independent model of the whole chain, including its
exact cycle. It counts each mechanism and fails if one never happens:
- Meas_Lock gating, m-vector fill, and missed calculations with underrun;
- burst requests on both sides, Mux X/P switches, stream back-pressure, and
  calculations while bursts are streaming;
- m-value and scale saturation;
- Wait_Config of 0 and 1000, and a delayed `dac_clk`.

Ring buffer overflow and near-full cannot happen in the assembled design,
which writes and reads one word per pulse. Only `tb_ring_buffer` exercises
them.

**`tb_ff_workload`** reproduces the published verification:
- **Sine test.** One full 10 ms Meas_Lock period with a full-scale 10 kHz
  sine on the ADC and the reset weights. The A-vector test pattern puts 1023
  or 511 at a position that moves down one index per pulse, duplicated on x
  and p. Every m-value is therefore used by 80 consecutive calculations. The
  8 ms hold phase gives 79,921 calculations with none missed. These fit in
  the 80,100 vectors per side the published test stored. Every phase word is
  45° (1280) or −135° (256). The one exception is a single Ax vector that
  carries an extra value of 1500 at index 0. As in the published long-run
  stability test, it must show up as exactly one phase peak.
- **Pulsed-light test.** The IM codes must alternate 184/92 and the PM code
  must be 1280, the values expected for that test.

It runs in about 15 s.

## Simulating

Verilator 5 (two-state simulation with timing):

    verilator --binary --timing --assert -Wno-fatal -Irtl \
        rtl/ff_pkg.sv $(ls rtl/*.sv | grep -v ff_pkg) tb/tb_ff_top.sv \
        --top-module tb_ff_top
    ./obj_dir/Vtb_ff_top

Replace `tb_ff_top` with any other test bench name. Block test benches need
only `rtl/ff_pkg.sv` and the module they test. `ff_top` needs every file in
`rtl/`. The test benches use `$urandom` for stimulus and need no data
files.

To change a size, edit the parameter defaults in `ff_pkg` or on the module.
Any instance may override them. The test benches follow the defaults.
