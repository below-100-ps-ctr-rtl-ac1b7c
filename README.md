# FastIC+ digital readout: an event-driven TDC built around a PLL

FastIC+ is an eight-channel front-end for fast photo-sensors (SiPMs, MCPs,
multi-anode PMTs). Each channel's analog part turns the sensor current into
binary pulses:

- a **time** pulse whose rising edge marks the photon arrival;
- an **energy** pulse whose width grows with the collected charge;
- a **trigger** pulse.

The chip digitizes these pulses itself, with a time-to-digital converter
(TDC) of about 24.4 ps bins. It sends everything on one serial line of up to
1.28 Gb/s.

The TDC has no per-channel delay line and no free-running counter per
channel. It uses a single PLL: a 16-cell ring oscillator locked to 32 times
the 40 MHz reference. The 16 VCO phases and a 5-bit count of VCO periods are
distributed to all channels. A hit freezes a copy of them, using the hit
itself as a clock. Everything after that capture is ordinary synchronous
logic at 40 MHz.

This repository holds synthesizable SystemVerilog for the digital part of
such a chip, with self-checking testbenches. The analog parts (input stage,
comparators, energy shaper and ramp, charge pump, loop filter, ring VCO,
SLVS pad driver) are outside the RTL and meet it at the top-level ports. A
behavioural model of the PLL's analog loop is provided for simulation only.

## Time in three nested counters

This is the part most worth understanding before reading the code.

| unit | width | source | resolution |
|------|-------|--------|-----------|
| coarse | 12 bits (+12 bits extension) | `coarse_counter`, 40 MHz | 25 ns |
| fast | 5 bits, Gray code | `clock_manager`, counts VCO periods | 781 ps |
| fine | 5 bits | the 16 VCO phases, thermometer code | 24.4 ps |

### Fine time: one VCO period in 32 bins

The ring has 16 cells. In one VCO period the edge travels round the ring
twice: once as a rising wave and once as a falling wave. Sampling the 16
phases therefore gives 32 distinct codes per period.

The codes form a *circular thermometer*. After `o` cell delays (`o = 0..31`),
phase `k` is:

- high when `k <= o`, for `o < 16`;
- high when `k > o-16`, for `o >= 16`.

Bit 0 tells which half of the period the code is in. The number of ones
gives the position inside that half:

```
fine = ones - 1     if bit 0 is set   (first half)
fine = 31 - ones    otherwise         (second half)
```

So `fine` equals `o` directly. `debubble_encoder` does exactly this, after a
majority-of-three vote of every bit with its two ring neighbours. At the
wrap-around the neighbour is taken inverted, because the ring has one
inverting connection. The vote removes isolated "bubbles", which are single
wrong bits caused by mismatch or noise.

### Low-power mode

Low-power mode switches off the odd phase buffers. Only the 8 even phases
remain, and the code steps in pairs of bins:

```
fine = 2*(ones-1)    or    30 - 2*ones
```

which gives 49 ps bins (`phase_buffers`, `debubble_encoder`).

### Timestamp (ToA) and width (ToT)

The timestamp of a rising edge is

```
ToA = {coarse[11:0], fast[4:0] (Gray decoded), fine[4:0]}   22 bits, 1024 codes per 25 ns
```

The falling edge is captured more coarsely: the fast count plus one bit
saying which half of the VCO period it fell in (390 ps). The pulse width is
therefore counted in half VCO periods:

```
t_fall = {coarse, fast, half}          t_rise = {coarse, fast, fine[4]}
ToT    = (t_fall - t_rise) mod 2^18,   saturated to 12 bits (1.6 us)
```

The modulo difference stays correct when the coarse counter wraps between
the two edges.

## The path of one hit

```
hit ──> fero ──> debubble_encoder ──> hit_pipeline x2 ──> pulse_factory ──> pulse_processor ──> channel FIFO
        (capture, 40 MHz resync)      (rise, fall: 75 ns)  (pairing, validation) (ToA, ToT, width filter)
```

### FERO: front-end readout

`fero` uses the hit line itself as a clock:

- Its **rising** edge loads the 16 phases (the UF-TCM, ultra-fast time capture
  matrix) and the Gray count.
- Its **falling** edge loads the Gray count and the half-period bit.

That is 16 + 5 bits for the rising edge and 5 + 1 bits for the falling edge:
27 bits per hit.

At most one rising and one falling edge may be captured in each 25 ns
period. Each edge kind has a toggle flag that flips on capture. A capture
is allowed only while the toggle equals its first 40 MHz sample, so a
second edge in the same period is ignored. Ignored edges are counted as
"filtered".

On the next two 40 MHz edges the captured data is copied and the change of
the toggle is detected. The event appears on the output two periods after
the one in which the edge arrived. It is tagged with that period's coarse
count.

### BERO: back-end readout

After the FERO, everything runs at 40 MHz:

- **Hit pipelines.** Both edge streams are delayed by three flip-flop stages
  (75 ns). This leaves time for an external coincidence system to decide
  whether the event is kept.
- **Pulse factory.** Pairs each rising edge with the next falling edge.
  - It discards a rising edge followed by another rising edge.
  - It discards a falling edge with no rising edge before it.
  - When validation is enabled, it discards any pulse that saw no validation
    pulse in a 4-cycle window ending when its rising edge leaves the pipeline.
    A validation pulse arriving while the pulse still waits for its falling
    edge also counts.
  - When both edges arrive in the same cycle, their half-period positions
    decide which came first.
- **Pulse processor.** Forms ToA and ToT and applies the optional width filter
  `wmin <= ToT <= wmax`. In single-pulse mode it marks only ToA or only ToT
  as present.
- **Channel FIFO.** Holds 8 processed pulses. A pulse arriving when it is full
  is dropped and counted as discarded.

Latency from the falling edge's 25 ns period to the pulse in the channel FIFO
is 2 (FERO) + 3 (pipeline) + 1 + 1 + 1 cycles.

## What the hit line carries: transmission modes

Each channel's TDC sees one line. `mode_mux` builds it from the time and
energy pulses, which arrive as consecutive pulses:

| mode | hit line | words per event |
|------|----------|-----------------|
| high energy resolution | time pulse, cut at the next 40 MHz edge, OR energy pulse | ToA of the time pulse; the energy pulse gives the energy width |
| high speed | time pulse | ToA and the (non-linear) ToT of the time pulse |
| hybrid | time pulse OR energy pulse | time ToA/ToT and, for a separate energy pulse, its width |
| single pulse | time pulse | ToA only or ToT only (register bit) |

In analog mode the TDC inputs are held low. The binary time and energy
pulses go straight to the `bin_time_out` and `bin_energy_out` ports, as in
the predecessor chip.

## Trigger channel and validation

A ninth TDC channel digitizes a trigger. `trigger_logic` selects its source
from four:

- the OR of the enabled channels' trigger comparators (only the fastest
  channel's edge survives the OR);
- the OR of their time comparators (for low-light signals);
- the external trigger pin (for calibration);
- the analog-sum high-level trigger.

The external pin also serves as the validation input. It is synchronized
with two flip-flops, and its rising edge becomes a one-cycle `val_pulse` for
the pulse factories. The trigger channel always runs in high-speed mode,
with no width filter and no validation.

## From nine channel FIFOs to one serial line

```
channel FIFOs ──> arbiter_mux ──> link_framer ──> async_fifo ──> aurora_tx ──> slvs_out
   (40 MHz)       RR or PST      + service words   40 MHz -> VCO   64B/66B, 80 Mb/s..1.28 Gb/s
```

### Arbitration

`arbiter_mux` grants one FIFO head per 40 MHz cycle, under one of two
policies:

- **Round robin.** The next non-empty channel after the last one served.
- **Pulse sorting by timestamp.** The oldest head first. Age is the current
  coarse count minus the head's coarse count, then the smaller fast/fine
  value. Sorting covers only the heads present, not pulses still deeper in
  the FIFOs.

### Link words

Every link word is 64 bits, one 64B/66B block. There are two kinds:

```
pulse:   [63:60]=1 [59:56]=channel [55]=has_toa [54]=has_tot [53:32]=ToA [31:20]=ToT [19:0]=0
service: [63:60]=2 [59:48]=coarse extension [47:44]=channel [43:28]=filtered [27:12]=discarded [11:0]=0
```

`link_framer` sends one service word each time the 12-bit coarse counter
wraps (every 4096 cycles, 102.4 us). The word carries:

- the new value of the 12-bit extension, so the receiver can rebuild
  24-bit timestamps;
- the two statistics counters of one channel, rotating over the nine
  channels.

Statistics are saturating 16-bit counts of filtered edges and discarded
pulses (`stats_counters`).

### Global FIFO and serializer

`async_fifo` carries the words from the 40 MHz domain to the VCO clock. It
uses Gray-coded pointers. When it is almost full, it holds the arbiter.

`aurora_tx` loads one 66-bit block per 66 bit periods, with a bit period of
`2^rate` VCO clocks (rate 0 gives 1.28 Gb/s, rate 4 gives 80 Mb/s). Each
block is one of:

- a data block: header bits `0,1` on the line, then the next FIFO word;
- an idle block: header `1,0`, block type `0x1E`, the rest zero.

The 64 payload bits are scrambled with the self-synchronous polynomial
`1 + x^39 + x^58` and sent least significant bit first.

## PLL digital part

- **`clock_manager`** divides the VCO clock by 32. It provides the Gray count
  of VCO periods, and the 40 MHz feedback and back-end clocks. Their rising
  edge comes when the count wraps to 0.
- **`pfd_lock`** samples the feedback clock at each reference edge. If the
  feedback is already high, the VCO is early and `dn` is asserted; otherwise
  `up` is asserted.
  - A locked bang-bang loop dithers, so the block measures runs of equal
    decisions.
  - `lock_cycles` cycles with short runs (at most 4) raise `locked`.
  - `unlock_cycles` cycles with longer runs clear it again. The two
    programmable counts give the hysteresis.
- **`phase_buffers`** gates the odd phases in low-power mode. It hands the
  per-phase delay trim bits to the analog buffers.

## Register map (I2C, device address 0x20, 32 registers of 8 bits)

The bus protocol is a START, then the address byte, then a register pointer
byte, then data bytes; the pointer increments after each byte. A read
starts after a repeated START.

| reg | bits |
|-----|------|
| 0 | [0] digital mode, [2:1] transmission mode (0 HER, 1 HS, 2 hybrid, 3 single pulse), [3] single pulse sends ToT, [4] timestamp sorting, [5] validation, [6] low power, [7] width filter |
| 1 | channel enables |
| 2 | [1:0] trigger source (0 trigger OR, 1 time OR, 2 external, 3 high level), [2] trigger channel on, [5:3] link rate, [6] clear statistics |
| 3, 4, 5 | width filter minimum / maximum (12 bits each: reg 3/4 low bytes, reg 5 high nibbles) |
| 6, 7 | PLL lock / unlock counts |
| 8..15 | phase-buffer trims, 4 bits per phase |
| 16..31 | analog settings, passed out on `analog_cfg` |

## Throughput

- **Channels.** Each channel delivers at most one pulse per 25 ns, because the
  FERO filter allows one of each edge kind per period.
- **Arbiter.** Moves one word per 40 MHz cycle.
- **Link.** At 1.28 Gb/s one 64-bit word per 66-bit block gives 19.4 million
  words per second: 2.4 million pulses per second per channel with all eight
  channels busy.

A figure of 3 million pulses per second per channel on every channel at
once would need fewer than 64 bits per pulse. The word format here does not
reach it.

## Where this design makes its own choices

The following are not fixed by the chip description this RTL follows and
were chosen here:

- the FERO control handshake;
- the de-bubbling method;
- the validation window;
- the edge-order rule;
- ToT width and saturation;
- FIFO depths (8 per channel, 16 global);
- arbitration age key;
- word formats and service-word policy;
- the I2C protocol and register map;
- the PFD lock criterion;
- the 2^n rate steps;
- how the high energy resolution mode cuts the time pulse.

Known departures and omissions:

- **Link protocol.** Only 64B/66B block coding is built. Aurora lane
  initialisation, clock compensation and flow control are not.
- **Phase-buffer trims.** The trims adjust analog delays. The RTL only
  forwards the bits.
- **Hybrid mode.** The energy width comes out as a second pulse word on the
  same channel. If the energy pulse starts in the same 25 ns period in which
  the time pulse ended, the FERO filter suppresses it.
- **Metastability.** A hit within a flip-flop setup time of a 40 MHz edge is
  not handled specially. In silicon such an edge can be reported one period
  off.
- **Radiation hardening.** Triplication of the PFD and clock manager is not
  part of this RTL.

## Simulating

Everything runs with plain Verilator 5 (`--binary --timing`). Every
testbench is self-checking, has a watchdog, and ends with a line
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fastic_pkg.sv tb/tb_fastic_plus_top.sv \
          --top-module tb_fastic_plus_top -o sim && ./obj_dir/sim
```

### Time scale and the VCO model

Every file sets `` `timescale 1ps/1ps ``, so one time unit is 1 ps whatever
default the simulator is given. The testbenches give `rst_n` a real falling
edge just after time 0, so every asynchronous flop is reset even when the
simulator starts variables at random values
(`+verilator+rand+reset+2`); all testbenches pass that way.

The behavioural model
`tb/pll_analog_model.sv` uses 24 ps cells, so one VCO period is 768 ps and
one 40 MHz period is 24.576 ns. This scales the real 24.4 ps / 25 ns by
0.98 and keeps all delays integer.

The model closes the loop: an `up` or `dn` decision shortens or lengthens
one cell delay by a few ps.

The testbenches place hit edges in the middle of a chosen bin. They then
predict the chip's ToA and ToT from the edge time alone.

### Testbenches

- One per block, named `tb_<module>`.
- `tb_tdc_channel` covers one complete channel. It runs:
  - random pulses;
  - the width filter;
  - single-pulse mode;
  - low power;
  - validation;
  - the FERO filter;
  - FIFO overflow.
- `tb_fastic_plus_top` runs the whole chip at its default parameters, in
  about 340 us of simulated time:
  - It programs the registers over I2C and reads them back.
  - It lets the PLL lock.
  - It drives hits in every mode.
  - It decodes the serial line with its own block aligner and descrambler.
  - It compares every word with its own prediction.
  - It counts each mechanism: lock, analog mode, FERO filter, width filter,
    validation, trigger channel, service words, idle blocks, overflow, the
    four modes, low power, both arbitration policies and the 80 Mb/s rate.

## Files

- `rtl/fastic_pkg.sv`: widths, enums, structs, Gray conversion.
- `rtl/fastic_plus_top.sv`: the chip's digital top.
- `rtl/tdc_channel.sv`: one channel.
- `rtl/`, other files: one block per file, each opening with a description
  of its function, interface and timing.
- `tb/`: testbenches and the PLL model.
