# DAT: dead-time-free transport of asynchronous pulses over a parallel optical link

The Digital Asynchronous Transceiver (DAT) sends eleven fast, asynchronous
digital signals between two VME modules over a twelve-fibre ribbon. The
signals are telescope triggers, event-number bits and calibration flags. Their
widths run from a few nanoseconds to milliseconds. They arrive at arbitrary
times, and none may be lost.

Two constraints shape the design:

* **The laser duty-cycle limit.** The parallel optical transmitter switches a
  lane off when its duty cycle goes above 57% within 1 µs. A long
  calibration flag therefore cannot be sent as a plain level.
* **No dead time.** Sampling the inputs with a clock, serialising them and
  rebuilding them at the far end would add quantisation jitter and
  busy periods. The link has to stay transparent.

The solution is purely combinational. At the transmitter each signal is XORed
with a free-running 25 MHz clock. A copy of that clock goes out on the
twelfth lane. Whatever the data does, every lane toggles at 25 MHz with about
50% duty cycle. At the receiver a phase-adjusted copy of the received clock
undoes the XOR. A small edge-triggered set/reset stage then removes the
glitches left by imperfect alignment. No signal is ever sampled, so
the link has no dead time. Its timing quality depends only on how well the
clock and data lanes line up.

This repository holds the SystemVerilog for the logic inside the two FPGAs.
It also has a behavioural model of the receiver's clock manager, and
testbenches that run the whole chain through a behavioural optical link.

## Signal chain

```
 IDC header  ─┐ 11                                   12 lanes               11 + clock
 LEMO inputs ─┤ 11  ┌──────────── dat_tx_fpga ───────────┐  (optics,   ┌──────────── dat_rx_fpga ─────────────┐
              └────►│ dat_input_select ─► dat_xor_encoder ├─► fibre, ─►│ dcm_phase_shift ─► dat_xor_decoder   │─► LEMO
 25 MHz osc ───────►│                     (11 x XOR, +1   │  not in    │ (clock lane)       (A, B per channel)│─► IDC
                    │                      XOR with 0)    │   RTL)     │                    dat_ddr_ff x 11   │
 VME (SYSCLK) ◄────►│ dat_vme_regs (model, ID, CSR)       │            │ dat_vme_regs (model, ID, CSR)        │◄──► VME
                    └─────────────────────────────────────┘            └──────────────────────────────────────┘
                                         └────────────────── dat_top ──────────────────┘
```

| Module | Role |
|---|---|
| `dat_pkg` | Channel counts, clock period, register map, CSR layout (`csr_t`), model numbers |
| `dat_input_select` | Per-channel 2:1 mux, IDC header or LEMO connector |
| `dat_xor_encoder` | 11 × (data XOR clock), plus clock XOR 0 on lane 11 |
| `dcm_phase_shift` | Behavioural model of the FPGA clock manager: delays the received clock by a multiple of 1/256 period |
| `dat_xor_decoder` | Per channel A = lane XOR clock and B = lane XOR inverted clock |
| `dat_ddr_ff` | Output stage: a rising A sets Q and a rising B clears Q |
| `dat_vme_regs` | A16/D16 VME slave with the three 16-bit registers |
| `dat_tx_fpga`, `dat_rx_fpga` | The two FPGAs |
| `dat_top` | One transmitter/receiver pair; the optical lanes are its ports |

Outside the FPGAs, and not written as RTL, are:

* the NECL/LVPECL level translators;
* the optical transmitter and receiver modules and the fibre;
* the 25 MHz oscillator;
* the configuration PROM and JTAG port.

In `dat_top`, `tx_lanes` and `tx_laser_en` go to the optical transmitter.
`rx_lanes` and `rx_link_en` come from the optical receiver, or from the wire
interconnect used when debugging.

## Encoding

For data bit `d` and clock `c`, the lane carries `d ^ c`:

* a low input sends the clock;
* a high input sends the inverted clock;
* an input edge inverts the lane at once, mid-period if need be.

Lane 11 carries `0 ^ c`. The XOR with a constant looks redundant, but it
makes the clock lane pass through the same kind of gate as the data lanes.
All twelve lanes then see the same delay and the same duty-cycle distortion.
Everything at the receiver depends on those lanes arriving together.

The duty cycle of a lane stays at 50% as long as the data holds still for
whole clock periods. Long levels, such as a millisecond flag, are therefore
harmless. Dense random data is not: pulses of a few ns that happen to fall in
one clock phase more than the other shift a lane's duty cycle. In simulation,
uncorrelated 5 ns-grid random data tripped the 57% limit within a
microsecond. Trigger-like traffic (short pulses spaced by hundreds of ns)
stays well inside the limit.

The CSR clock-enable bit gates the clock with an AND gate before the XORs.
With the clock off, the lanes carry the raw inputs.

## Recovering the data

This is the subtle part of the design.

**Alignment.** The received clock lane drives the FPGA's clock manager. In
feedback mode the clock manager cancels its own insertion delay and adds a
fixed phase shift, in steps of 1/256 of a period (156.25 ps at 25 MHz). The
shift is chosen for a given pair of boards and cable so that the shifted
clock's edges fall on the encoded data's edges. In the RTL the shift is the
parameter `PHASE_SHIFT` of `dat_rx_fpga` and `dat_top`, in −255…255 steps. On
the board it is fixed when the FPGA is configured.

**Two XORs.** Each data lane is decoded twice:

* A = lane XOR shifted clock;
* B = a second copy of the lane XOR the inverted shifted clock.

With perfect alignment, A is the data and B its complement.

**Why one XOR is not enough.** On the real board the encoded lanes' duty
cycle differs by about 200 ps between a low and a high input. Rising and
falling edges take different paths through the FPGA. One clock phase can
therefore line up with the lane for only one of the two input levels. The
phase is chosen to be exact for a low input. A is then clean while the data is
low, but dips low for a fraction of a nanosecond at every clock edge while
the data is high. Through its separate routing, B is arranged to be clean
while the data is high and to dip while it is low.

**The output stage.** `dat_ddr_ff` obeys four rules:

| A | B | Q |
|---|---|---|
| ↑ | – | 1 |
| ↓ | – | Q |
| – | ↑ | 0 |
| – | ↓ | Q |

A dip in A ends with a rising A, which only re-asserts Q = 1. A dip in B ends
with a rising B, which only re-asserts Q = 0. A real data edge produces a
rising A (low-to-high) or a rising B (high-to-low) and passes straight
through. On the board this is the FPGA's dual-data-rate output register with
A and B as its two clocks and constant data 1 and 0. In the RTL it is two
ordinary flip-flops:

* on a rising A, `qa <= ~qb`;
* on a rising B, `qb <= qa`;
* `Q = qa ^ qb`.

The two flip-flops together follow the same four rules and are synthesizable
in any flow.

**What the RTL can and cannot show.** In a zero-delay logic model, B is
exactly the complement of A. The model therefore reproduces the logic of the
receiver but not the board's edge-rate asymmetry, which is what makes the A/B
pair necessary. The testbenches exercise both sides:

* `tb_dat_ddr_ff` drives A and B with the waveforms described above: A dips
  while the data is high, B dips while it is low. Q follows the data with no
  extra transitions.
* `tb_dat_rx_fpga` and `tb_dat_top` run the real decoder. A correctly aligned
  receiver reproduces every edge. A receiver whose clock is 1.25 ns off emits
  spurious pulses 1.25 ns wide at every clock edge, 50 MHz in all. The
  misalignment has to be found and dialled out with `PHASE_SHIFT`.

**Latency.** From an input pin to an output pin the path has about four gates
and the output register, plus the link. None of it is clocked. The RTL model
adds no delay of its own: in simulation an output edge appears exactly one
link delay after the input edge.

## Control registers

Each module is an A16/D16 VME slave. It answers:

* address modifiers 0x29 and 0x2D;
* when A15..A8 equal the jumper address `base_addr` and A7..A3 are zero.

Other addresses get no DTACK*.

| Offset | Register | Access |
|---|---|---|
| 0x0 | Model number: 0xDA71 transmitter, 0xDA72 receiver | read |
| 0x2 | Module ID (`module_id` input, strapped on the board) | read |
| 0x4 | CSR | read/write |

| CSR bit | Transmitter | Receiver |
|---|---|---|
| 10..0 | input select of channel *i*: 0 IDC, 1 LEMO | reads 0 |
| 11 | laser enable (`laser_en` to the optical transmitter) | optical receiver enable (`link_en`) |
| 12 | coding clock enable | decoding clock enable |
| 13 | user LED | user LED |
| 14 | test-header enable (`test_hdr_en`) | same |
| 15 | reads 0 | reads 0 |

The slave runs on VME SYSCLK (16 MHz) and synchronises the strobes with two
flip-flops. DTACK* follows three SYSCLK edges after the data strobe. DS1* and
DS0* act as byte enables on writes. SYSRESET* clears the CSR: laser and clock
off, every channel on the IDC header. Assertions check two bus rules: data is
driven only during an acknowledged read, and DTACK* only in answer to a
strobe.

Crate-scanning software identifies modules by reading offset 0 at each
candidate address.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NUM_DATA` | 11 | all data-path modules | data channels; lanes = `NUM_DATA`+1 |
| `PHASE_SHIFT` | 0 | `dat_top`, `dat_rx_fpga`, `dcm_phase_shift` | receiver clock delay in 1/256 periods; 0 fits a link whose twelve lanes have equal delay |
| `CLKIN_PERIOD_PS` | 40000 | `dcm_phase_shift` | 25 MHz |
| `LOCK_CYCLES` | 4 | `dcm_phase_shift` | input edges before the model reports lock |
| `MODEL_NUMBER`, `CSR_MASK` | see `dat_pkg` | `dat_vme_regs` | identification and writable CSR bits |

## Simulating

Every file starts with a description of its module. `dat_pkg.sv` must be read
first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
          rtl/dat_pkg.sv tb/tb_dat_top.sv --top-module tb_dat_top
./obj_dir/Vtb_dat_top
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

| Testbench | What it shows |
|---|---|
| `tb_dat_input_select`, `tb_dat_xor_encoder`, `tb_dat_xor_decoder` | gate-level function; the encoder keeps every lane at exactly 50% duty cycle |
| `tb_dat_ddr_ff` | the rule table; glitch filtering with board-like A/B waveforms |
| `tb_dcm_phase_shift` | phase steps of 156.25 ps (0, +6, +128, −10 steps); lock; duty cycle kept |
| `tb_dat_vme_regs` | register map, masks, byte writes, ignored cycles, DTACK* timing, reset |
| `tb_dat_tx_fpga`, `tb_dat_rx_fpga` | each FPGA on its own; aligned against misaligned receiver |
| `tb_dat_top` | two default pairs end to end (details below) |
| `tb_dat_workload_arrival` | see below |

`tb_dat_top` runs these mechanisms and counts each one:

* module scan;
* lasers off;
* random trigger traffic checked every 0.5 ns;
* per-channel input switching;
* 5 ns pulses with 5 ns gaps;
* a 3 µs level;
* a laser-safety trip and its reset;
* spurious pulses from a misaligned pair.

`tb_dat_workload_arrival` runs the 1 MHz, 200 ns arrival-time measurement on
all eleven channels over a 300 ns (about 60 m) link. It computes the mean
arrival, skew and spread per channel, then runs a 1 ms flag next to 1 MHz
pulses.

`tb/paroli_link_model.sv` is a behavioural stand-in for the optics. Each lane
gets a transport delay, with an optional per-lane skew. Lanes are gated by the
two enables. A lane trips when it is high for more than 57% of a 1 µs window
and stays off until the laser enable is dropped. The windows are back to
back, not sliding. `tb/vme_master_bfm.sv` is a simple VME master.

Everything runs in well under a second. All testbenches use `timescale
1ns/1ps`. Pick phase shifts and skews that are whole picoseconds
(multiples of 8 steps of 156.25 ps); otherwise delays are rounded and the
lanes are no longer exactly aligned.

## How far to trust it, and where it departs

Follows the described design:

* 11 channels, with IDC/LEMO selection per channel over VME;
* XOR coding with a 25 MHz clock and the twelfth lane XORed with ground;
* a receiver clock phase-shifted in 1/256-period steps;
* A and B decoding and the set/reset output rule table;
* eleven data outputs plus the clock on two front-panel connectors;
* three 16-bit VME registers (model, ID, CSR) with the listed controls.

This design's own choices:

* VME addressing, register offsets, CSR bit positions, model-number values
  and reset values;
* AND-gating of the clocks for the clock-enable bit;
* the two-flip-flop form of the dual-edge output register;
* using the CSR laser bit as the enable of the optical receiver;
* driving the front-panel clock from the received clock lane;
* using VME SYSCLK for the register logic.

Not modelled:

* analog timing: duty-cycle distortion, jitter, the 200 ps data-dependent
  asymmetry, I/O standards;
* the selection between fibre and wire interconnect, taken here to be made
  on the board;
* the function of the seven test-header pins, which is left to be assigned by
  reprogramming (only their enable bit exists);
* adjusting the phase shift at run time.

The arrival-time test therefore shows zero skew and zero jitter. The design
itself cannot yield those numbers; on the board they come from the physics.

`dcm_phase_shift` is a simulation model with delays. A synthesis flow must
replace it with the FPGA's clock-manager primitive, fixed phase mode, set to
`PHASE_SHIFT`. Everything else is synthesizable.

`dat_ddr_ff` clocks flip-flops from decoded data rather than from a clock, by
design. Timing analysis must treat A and B as clocks. The simultaneous rising
edges of A and B that the rule table leaves undefined cannot occur while
B = ¬A.
