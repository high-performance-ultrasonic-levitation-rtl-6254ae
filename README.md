# Phased-array acoustic levitator: FPGA logic

An ultrasonic phased array holds a small particle in mid-air at the focus of
many transducers. Each transducer plays the same tone, and each is shifted in
time so that all the waves arrive at the focal point in step. The particle is
moved by moving that focal point. The faster a new set of shifts can be
computed and applied, the smaller the steps and the steadier the motion.

This RTL is the programmable-logic side of such a levitator on a Zynq-class
SoC. The array is an 8x8 grid of 40 kHz transducers and the fabric clock is
100 MHz. The logic has two parts:

* **`phase_calculate`** is an accelerator. It takes a focal point and
  returns, for every transducer, the drive delay in clock cycles that focuses
  the array there.
* **`upac`** (ultrasonic phased array controller) holds one delay per
  channel. It turns those delays into 64 square waves for the MOSFET driver
  board that powers the transducers.

An embedded processor runs the control loop, and both blocks are AXI4-Lite
slaves of that processor. The processor also reads a temperature sensor,
since the speed of sound, and so the wavelength, depends on temperature. It
samples the echo from two transducers used as receivers, and it runs the
user interface. None of these processor-side parts are in this RTL.

```
              AXI4-Lite                     AXI4-Lite
 processor ──────────────► phase_calculate  ──────────► upac ──► fmc_drive[63:0] ──► MOSFET drivers ──► transducers
 (external)  focal point,    │ phase_cu x NUM_CU          │ register file
             wavelength,     │ (pipelined Eq. 1, 2)       │ upac_wavegen (shared counter,
             period          └─► RESULT[0..63], irq       │ per-channel compare)
```

The two blocks are not wired to each other. The processor reads the 64
results and writes them into the controller. This matches a system in which
software decides what to do with each computed pattern: play it, combine it,
or cycle through several.

## The phase of one transducer

Take transducer *i* at position **t** and a focal point **f**. The path
length is

    LP_i = sqrt((fx-tx)^2 + (fy-ty)^2 + (fz-tz)^2)                 (1)

A wave travelling that far falls behind by LP_i/λ cycles, where λ is the
wavelength. So to arrive in step with the others, the transducer must lead
by the fractional part of that:

    phi_i = 2π · frac(LP_i / λ)                                    (2)

The hardware works in clock cycles of the drive period P (2500 cycles for
40 kHz at 100 MHz):

    phi_i [cycles] = floor((LP_i mod λ) · P / λ)
    delay_i        = (P − phi_i) mod P

A lead of φ on a periodic wave is the same waveform as a delay of P − φ. The
controller takes delays, so the last line converts the lead into a delay.
This conversion is the step most easily got backwards. The end-to-end test
checks it physically: for every driven channel, (edge time + LP_i/λ · P) is
computed and must be equal modulo P across the array to within 2 cycles.

### Number formats

| quantity | format | range |
|---|---|---|
| coordinates | signed micrometres, 20 bits (`COORD_W`) | ±524 mm |
| sum of squares | unsigned, 42 bits (`SQ_W`) | |
| path length | unsigned micrometres, 21 bits (`LP_W`) | 2.1 m |
| wavelength | unsigned micrometres, 16 bits (`WL_W`) | 65 mm |
| period, delay | clock cycles, 13 bits (`PHASE_W`) | 8191 |

Each step rounds down: the square root, and the scaling to cycles. The error
is under one micrometre of path length and one clock cycle of delay. At
40 kHz, one cycle is 1/2500 of a period, or 0.14° of phase.

### `phase_cu`: the pipelined compute unit

One operand enters per cycle and one result leaves per cycle, 60 cycles
later:

| stages | work |
|---|---|
| 1 | per-axis difference f − t |
| 1 | three squares (magnitudes, unsigned products) |
| 1 | sum of the three squares (axis loop fully unrolled) |
| 21 | `isqrt_pipe`: digit-by-digit square root, one root bit per stage |
| 21 | `div_pipe`: LP mod λ by restoring division, one quotient bit per stage |
| 1 | remainder × P |
| 13 | `div_pipe`: (remainder · P) / λ, only the 13 quotient bits that can be non-zero |
| 1 | delay = (P − φ) mod P |

λ and P feed the unit directly and must not change while operands are in
flight. `phase_calculate` ensures this by not accepting a start while it is
busy, and the software must not rewrite those registers during a run. A tag,
the transducer index, travels with each operand. The divider also carries its
divisor down the pipe, so it can be reused wherever the divisor changes from
operand to operand.

The square root and dividers are the bulk of the logic. With the defaults,
one unit has 55 pipeline levels of 29-to-42-bit compare-and-subtract (21 for
the root, 21 and 13 for the two divisions), plus three 21x21 multipliers and
one 16x13 multiplier.

## `phase_calculate`: the accelerator

The processor writes the focal point, the wavelength, the period and a range
of transducers, then writes START. The controller feeds `NUM_CU` transducers
per cycle, round robin, into `NUM_CU` copies of `phase_cu`. It writes each
result into that transducer's result register. When the last result is back
it raises DONE, which is also the interrupt.

A run of n transducers takes exactly `ceil(n/NUM_CU) + 60` cycles from the
accepted START write. That is 124 cycles, or 1.24 µs, for a 64-transducer
frame on one unit. The CYCLES register reports this count. More units only
help for long runs, because the 60-cycle fill dominates a 64-transducer frame.

Transducer positions are not stored. They are computed in logic for a flat
grid centred on the origin in the z = 0 plane, with index
i = row·`ARRAY_COLS` + column:

    x_i = (2·(i mod COLS) − (COLS−1)) · PITCH/2
    y_i = (2·(i div COLS) − (ROWS−1)) · PITCH/2

The default pitch is 16.5 mm: a 132 mm array side divided by 8 transducers.
Other arrays, such as a spherical cap, need this function replaced by their
own coordinates.

| address | register | access | meaning |
|---|---|---|---|
| 0x000 | CTRL | W: bit0 START, bit1 clear DONE; R: bit0 BUSY, bit1 DONE | START is ignored while busy |
| 0x004/008/00C | FX, FY, FZ | RW | focal point, signed µm |
| 0x010 | WAVELENGTH | RW, reset 8575 | µm (343 m/s at 40 kHz) |
| 0x014 | PERIOD | RW, reset 2500 | drive period in cycles |
| 0x018 | OFFSET | RW, reset 0 | first transducer of the run |
| 0x01C | COUNT | RW, reset 64 | number of transducers, clipped at the array end |
| 0x020 | CYCLES | R | length of the last run |
| 0x100+4i | RESULT[i] | R | delay of transducer i; untouched if i was not in the run |

Unmapped or misaligned addresses answer SLVERR.

Temperature compensation is done entirely through WAVELENGTH. The software
computes the speed of sound from the measured temperature, writes λ = c/f,
and recomputes. Over −25…40 °C, λ at 40 kHz moves by about 1 mm (12 %).
For a transducer 100 mm from the focus, about 12 wavelengths away, that
shifts the required phase by more than a full period.

## `upac`: the drive controller

`upac_wavegen` runs one counter from 0 to PERIOD−1. Channel *i* is high
while (count − delay_i) mod PERIOD is below PERIOD/2. This gives a 50 %
square wave whose rising edge comes delay_i cycles into the period. The
transducers filter out the harmonics, so a square wave drives them as well
as a sine.

The delays and the period are copied into the generator only at the wrap of
the counter, which is pulsed on `frame_tick`. There are two consequences:

* Within one period every channel plays the delay it held at that period's
  start. When a channel's delay changes from d to d', the one pulse around
  the boundary is lengthened or shortened by the difference. Small focal
  steps change delays by a few cycles, so the effect is small; a jump to an
  unrelated pattern can cut one pulse short. If the writes of
  a new pattern straddle a boundary, that one period mixes old and new
  channels; every later period plays the complete new pattern. Software that
  must avoid the mixed period can write right after `frame_tick`; 128 AXI
  transfers fit well within the 2500-cycle period.
* A new pattern reaches the pins at most one period (25 µs) after its last
  write.

Timing: with `frame_tick` high in cycle 0, channel *i* rises in cycle
delay_i + 1. In the first period after RUN is set, a channel whose pulse
wraps round the period boundary starts with only the tail of that pulse, so
the first period is not a full pattern.

| address | register | reset | meaning |
|---|---|---|---|
| 0x000 | CTRL | 0 | bit0 RUN: counter runs; outputs low when 0 |
| 0x004 | PERIOD | 2500 | cycles per period: 2500 for 40 kHz, 4000 for 25 kHz |
| 0x008 + 4k | CH_EN[k] | all 1 | enables of channels 32k…32k+31 |
| 0x100 + 4i | DELAY[i] | 0 | delay of channel i, 0 ≤ DELAY < PERIOD (values up to 2·PERIOD−1 wrap) |

Clear a channel's enable bit when that transducer is wired as an echo
receiver, so it is never driven. PERIOD allows the same logic to drive
25 kHz transducers. In that case the processor also writes the matching
wavelength and period into `phase_calculate`.

## Several focal points

The array makes one focus at a time. The effect of several focal points is
made by cycling the focus between them fast enough: compute point A, copy it,
compute point B, copy it, and so on. This is done by software on the two
blocks above. The hardware's share of one switch is 124 cycles of
computation, 128 register transfers over AXI, and at most one 25 µs period
until the new pattern is on the pins.

## Top level: `levitation_pl_top`

`levitation_pl_top` instantiates both blocks. It has the following ports:

* clock and synchronous active-low reset;
* two AXI4-Lite slave ports, `s_phase_*` and `s_upac_*`, as `lev_pkg::axil_req_t` / `axil_resp_t` structs;
* the accelerator interrupt `phase_irq`;
* the 64 drive signals `fmc_drive`;
* `frame_tick`.

The top does not contain the following. They must be supplied around it:

* the AXI interconnect that joins both ports to the processor;
* the reset generator;
* the interrupt concatenation;
* the ADC that samples the echo channels;
* the I2C interface of the temperature sensor;
* the off-chip MOSFET drivers.

The parameters are `NUM_CH` (64) and `NUM_CU` (1). `NUM_CH` sets both the
number of drive channels and the number of transducers in the accelerator.
`NUM_CH` can be at most 960, because the delay registers must fit the 4 KiB
window.

## Where this departs from, or adds to, the published platform

The published platform gives these points, and this RTL follows them:

* a 64-channel (8x8) array driven by FPGA-generated 40 kHz square waves;
* delays in clock cycles, written to controller registers over AXI;
* a 100 MHz fabric clock;
* an accelerator that takes the focal coordinates and a transducer offset,
  evaluates Eq. (1) and (2) in a pipelined, unrolled loop, returns one phase
  per transducer, and can have one, two or four compute units;
* 25 kHz transducers as an alternative;
* a wavelength updated from temperature by software.

The following are this design's own choices:

* all bit widths and fixed-point formats;
* both register maps;
* the COUNT and CYCLES registers;
* the run bit, the channel-enable mask and the period register;
* sampling the pattern at the period boundary;
* the lead-to-delay conversion in `phase_cu`;
* the digit-recurrence square root and dividers;
* the round-robin split between units;
* result registers in place of HLS-generated data movers;
* the 16.5 mm grid pitch and the row-major transducer numbering.

The original accelerator was produced by high-level synthesis, and its
internal structure is not published. This pipeline reproduces its function,
not its microarchitecture. Its cycle counts cannot be compared with the
reported 60 µs system update time, which includes software and data movement.

The following are not covered:

* spherical-cap arrays: transducer positions are not known, so the position
  function covers the flat grid only;
* a single call computing many frames (a batch of 160 frames of 64), which
  is done here as separate runs;
* the echo processing that locates the particle, which happens in software
  on ADC samples.

## Files

* `rtl/lev_pkg.sv` holds the shared constants, number formats and AXI4-Lite
  structs.
* `rtl/axil_slave.sv` is the AXI4-Lite front end used by both blocks. It
  turns transactions into single-cycle register accesses and asserts the
  master's valid-stability rules.
* `rtl/isqrt_pipe.sv` and `rtl/div_pipe.sv` are the pipelined arithmetic.
* `rtl/phase_cu.sv` is the compute unit, and `rtl/phase_calculate.sv` is the
  accelerator.
* `rtl/upac_wavegen.sv` is the drive generator, and `rtl/upac.sv` is the
  controller.
* `rtl/levitation_pl_top.sv` is the top level.
* `tb/` holds one self-checking testbench per block, an AXI4-Lite master
  model (`axil_master_bfm`) and a reference model of the phase equations
  (`phase_ref_pkg`, written from the equations with a real-valued square
  root).

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. To
run the end-to-end test at full size (64 channels, one unit, 40 kHz and
25 kHz):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/lev_pkg.sv tb/phase_ref_pkg.sv tb/tb_levitation_pl_top.sv \
    --top-module tb_levitation_pl_top -Mdir obj && ./obj/Vtb_levitation_pl_top
```

Replace the testbench and top-module name for the others:

| testbench | what it checks |
|---|---|
| `tb_upac_wavegen` | every output bit of every cycle at 2500- and 4000-cycle periods, a mid-period pattern change, masking |
| `tb_upac` | register reset values and read-back, SLVERR, rising edge = delay + 1 and duty cycle of each channel |
| `tb_phase_cu` | 400 operands, including extreme coordinates and exact wavelength multiples, against the reference model, with 60-cycle latency and back-to-back output |
| `tb_phase_calculate` | instances with 1 and 4 units, full and partial runs, cycle count, interrupt, ignored START |
| `tb_orbit_workload` | 160 steps of a 30 mm circular orbit at 0.0304 mm per step: each update (compute, read, copy) must fit one drive period, every frame checked on the pins; the same frames on a four-unit accelerator at 76 cycles each |
| `tb_levitation_pl_top` | the whole update path as software would run it, focusing at the focal point, point switching, 40 → 25 kHz, receiver masking, stop |

All of them finish in a few seconds. The orbit test measures a worst-case
update of 519 cycles (5.19 µs) with a testbench AXI master that needs about
four cycles per transfer. The pattern can therefore change on every 25 µs
drive period, a 40 kHz refresh rate.
