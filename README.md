# Closed-loop wavefront optimizer for a MEMS phase modulator

Light sent through a scattering sample (ground glass, tissue, a colloid)
comes out as a random speckle pattern. If the phase of the incoming beam is
shaped correctly, the scattered waves can be made to interfere
constructively at one chosen point. The result is a bright focus behind the
sample. The right phase mask depends on the sample. If the sample moves, for
example a colloid or living tissue, the mask goes stale within tens to
hundreds of milliseconds. So the mask has to be found quickly and kept up to
date.

This RTL is the FPGA part of such a system. The FPGA drives a segmented MEMS
mirror, used as a phase-only spatial light modulator (SLM) with 1020
segments. It gets its feedback from a photomultiplier (PMT) that watches one
speckle grain, digitized by a DAQ board. The FPGA runs a *closed-loop*
optimization: each iteration improves one mode of the mask and applies the
improvement at once, so the focus grows while the optimization is still
running. With the default 80 MHz clock, one iteration takes 242.95 µs, about
4.1 kHz. The whole 1023-mode basis is covered in about 249 ms.

The scheme follows the system of Blochet, Bourdieu and Gigan, *Focusing light
through dynamical samples using fast closed-loop wavefront optimization*.
That publication gives the algorithm, the iteration timing and the
instruments. It says nothing about the FPGA's internals. Everything below
that level, such as word widths, the clock, the encodings and the
interfaces, is this design's own choice. Each choice is marked as such
below and in the opening comment of every file.

## One iteration

Each iteration optimizes one *Hadamard mode*: half of the mirror segments,
chosen by one row of a Hadamard matrix. The other half is held fixed as a
phase reference. The iteration has six steps, in this order:

| step | what happens | time (published) | clocks at 80 MHz |
|---|---|---|---|
| probe transfer | mask sent with +2π added on the mode's pixels | 13 µs | 1025 |
| dephasing / acquisition | mirror travels 0→2π; three DAQ triggers | 68 µs window (inside a 100 µs ramp) | 5440 |
| sample transfer | DAQ returns the three PMT values | 49 µs | set by the DAQ |
| estimate | three-phase interferometry | negligible | 17 + handshakes |
| update transfer | optimum phase added to the mode's pixels, mask sent | 13 µs | 1025 |
| settling | mirror reaches the new mask; next mode computed | 100 µs | 8000 |

The times add up to 13 + 68 + 49 + 13 + 100 = 243 µs. The full-size
testbench measures 19436 clocks, or 242.95 µs, with a DAQ that answers 49 µs
after the end of the third measurement.

### Why a single probe mask produces a continuous ramp

The FPGA does not send a series of masks to sweep the phase. It sends **one**
probe mask, in which every pixel of the mode has its stored phase plus 2π.
The MEMS segments need about 100 µs to move to a new position. While they
travel, the extra phase on the mode pixels grows continuously from 0 to 2π,
and the PMT signal traces one full cosine period. The three triggers are
placed at 0, 1/3 and 2/3 of the 100 µs travel: clocks 0, 2666 and 5333
after the probe has been sent. There the extra phase is 0, 2π/3 and 4π/3.
The window ends at 68 µs, just after the third trigger. The FPGA stops
watching the ramp there and does not wait for the mirror to finish.

This reading is an interpretation of the publication. It describes "a
continuous phase shift" lasting 100 µs, triggered after a single 13 µs mask
transfer. It also describes the final step as a 2π-sized phase difference
that needs another 100 µs. The timing only fits if the mirror's own travel
produces the ramp. The model assumes that the travel is linear in time. A
real mirror's step response is not exactly linear. On hardware the trigger
instants (`T_RAMP`) would be calibrated to the measured motion.

Because the probe adds 2π on top of a stored phase in [0, 2π), the words sent
to the SLM span 0 to 4π. The SLM word `slm_code` is therefore one bit wider
than a stored phase. Its top bit is the probe's 2π offset.

After the update, the mode pixels move from "phase + 2π" down to "phase + θ".
That is a step of nearly 2π, which is why the design allows 100 µs of
settling (`T_SETTLE`). Without it, the next probe would start from a mirror
that is still moving.

## The three-phase estimate

With the mode dephased by θ, the PMT reads I(θ) = A + B·cos(θ + δ). A is the
power from both halves on their own. B comes from their interference. The
three samples at θ = 0, 2π/3 and 4π/3 determine A, B and δ, and the
intensity is largest at

    θ_opt = atan2( √3·(I1 − I2), 2·I0 − I1 − I2 ).

`psi3_phase` works this out as follows:

1. It forms both arguments in integer arithmetic. √3 is the constant
   7094/4096, and the other argument is scaled by 4096 to match.
2. If the vector lies in the left half-plane, it folds it to the right half
   and adds π.
3. It runs 14 CORDIC vectoring steps, one per clock, accumulating the angle
   in 16-bit binary units where 2¹⁶ = 2π.
4. It rounds the angle to the 8-bit phase word.

Against a floating-point reference, the result stays within one phase LSB
(2π/256). If all three samples are equal, there is no modulation, and the
output is 0, which leaves the mask unchanged. The `done` pulse comes 17
clocks after `start`.

## Hadamard modes

`hadamard_gen` fills a 1-bit-per-pixel buffer for the next mode while the
mirror settles. It uses the Sylvester (Walsh) ordering: pixel p belongs to
mode m exactly when popcount(m AND p) is odd. For every m > 0 this selects
exactly half of the 1024 grid positions. Any two modes differ on exactly
half of the pixels.

- **Mode 0 is skipped.** It is the whole array, so it only changes the
  global phase.
- **Mode order.** The loop visits modes 1 to 1023 and then starts again at
  mode 1, with no end; `sweep_count` counts these restarts.
- **Pixel numbering.** Pixel p is row·32 + column.
- **Corners.** The four corner positions of the 32 × 32 grid have no mirror
  segment. They are computed but never sent, so a mode covers 509 to 512 of
  the 1020 real segments.

## The phase mask and its update

`phase_mask_mem` keeps one 8-bit word per pixel. A word is the phase as an
unsigned fraction of 2π, so adding the optimum phase wraps modulo 2π without
any extra logic.

`mask_streamer` walks the 1024 addresses once per transfer, one per clock:

- It reads the mask word and the mode bit of each address, both with one
  clock of latency.
- In an **update** transfer it adds θ_opt to the pixels of the mode, writes
  the sum back, and sends it. The write-back of pixel p happens while pixel
  p+1 is being read, so the read-modify-write has no hazard.
- It sends the 1020 non-corner words in raster order. `slm_last` marks the
  last word.

`clear_mask` (accepted while idle) writes a flat mask and restarts the basis
at mode 1.

The SLM driver receives phase codes, not voltages. Turning a code into an
actuator voltage needs the mirror's calibration. That belongs to the driver
and is not part of this RTL.

## Control and status

- **Starting and stopping.** `run` is a level. Raising it starts the loop, or
  resumes it with the mode already in the buffer. Dropping it lets the
  current iteration finish, so the mirror always ends on a complete,
  consistent mask. The exception is an iteration still waiting for its DAQ
  samples: that one is abandoned, and the mask is left as it was.
- **Late samples.** Samples that arrive after an abandoned iteration are
  discarded when the next acquisition window re-arms the receiver.
- **Overruns.** `daq_overrun` counts sample words that arrive when none is
  expected.
- **When to stop.** The publication stops the optimization by hand once the
  focus stops improving. `run` is the input for that decision.
- **Status outputs.** `state`, `mode_idx`, `iter_count`, `sweep_count` and
  `last_phase` (the most recent θ_opt) show progress.

Two assertions in `wfs_top` guard the sharing of resources:

- A mask transfer runs only in the two transfer states.
- The mode buffer is never rewritten while a transfer is reading it.

## Blocks and files

| file | role |
|---|---|
| `rtl/wfs_pkg.sv` | clock, timing and size constants; sequencer state type |
| `rtl/wfs_top.sv` | top level: wires the blocks, external ports, assertions |
| `rtl/loop_ctrl.sv` | iteration sequencer, mode counter, run/stop/clear |
| `rtl/hadamard_gen.sv` | Walsh–Hadamard mode buffer |
| `rtl/phase_mask_mem.sv` | phase mask memory (1024 × 8 bit) with clear |
| `rtl/mask_streamer.sv` | probe and update transfers to the SLM, mask write-back |
| `rtl/daq_trigger_gen.sv` | the three acquisition triggers and the 68 µs window |
| `rtl/daq_rx.sv` | receiver for the three PMT samples |
| `rtl/psi3_phase.sv` | three-phase interferometry, CORDIC atan2 |
| `tb/tb_optics_daq_model.sv` | behavioural mirror, scattering sample, PMT and DAQ |

The blocks talk to each other with single-clock start/done pulses. The
sequencer waits on the `done` of each step before starting the next.

### External ports of `wfs_top`

- SLM: `slm_valid`, `slm_addr` (10 bit), `slm_code` (9 bit, units of
  2π/256, range 0–4π) and `slm_last`. One word per clock; 1020 words per
  mask.
- DAQ: `daq_trig` is a 100 ns pulse per acquisition; `daq_trig_idx` gives
  which of the three it is. `daq_valid` and `daq_data` (16 bit) bring the
  three samples back in trigger order, at any time after the triggers.
- Host: `run`, `clear_mask`, and the status outputs listed above.

## Parameters

| parameter | default | origin |
|---|---|---|
| `GRID` | 32 (1020 segments) | the mirror used; the publication gives 1020 pixels |
| `PW` | 8-bit phase | this design |
| `IW` | 16-bit samples | this design (matches a 16-bit DAQ) |
| `T_RAMP` | 8000 clocks = 100 µs | published |
| `T_MEAS` | 5440 clocks = 68 µs | published |
| `T_SETTLE` | 8000 clocks = 100 µs | published |
| `TRIG_W` | 8 clocks = 100 ns | this design |
| clock | 80 MHz | this design; it makes the 1024-slot walk last the published 13 µs |

All times are in clocks, so another clock only needs new `T_*` values.
`GRID` must be a power of two because the Hadamard construction needs one.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

- `tb_hadamard_gen`: every bit of several modes against the Walsh parity;
  half-size modes; orthogonality; the timing; a start while busy is ignored.
- `tb_phase_mask_mem`: read and write, same-clock write-back, and the clear.
- `tb_psi3_phase`: 200 random (A, B, δ) cases plus the axes, full scale and
  zero modulation, each within one LSB, with the latency checked.
- `tb_mask_streamer`: each probe and update word, the write-backs, corner
  skipping, and the cycle of the last word.
- `tb_daq_trigger_gen`: trigger edges at 0, 2666 and 5333 clocks, pulse
  width, and the 68 µs window.
- `tb_daq_rx`: sample order, `ready`/`done`, and the overrun count.
- `tb_loop_ctrl`: the order of steps, the mode walk and its restart, the
  settling time, the exact period, stop, abandon, resume and clear.
- `tb_wfs_top`: closed loop on an 8 × 8 array with all times scaled down.
  It checks every probe word against the mode and the iteration period. It
  also makes each control mechanism happen and counts them: basis restart,
  stop, resume, abandoned wait, overrun and clear. The focus grows from a
  speckle value of 0.77 to an enhancement of about 39; the ideal phase-only
  limit for 60 segments is about 47.
- `tb_wfs_full`: the design at its default size and timing, on a static
  medium without noise. One sweep of 1023 modes takes about 17 s of
  simulation. It measures 242.95 µs per mode (4.12 kHz), and the
  enhancement goes 0.6 → 113 → 215 → 468 after 255, 511 and 1023 modes.

- `tb_wfs_dynamic`: the main use case, focusing through a sample whose
  speckle decorrelates. Two full-size optimizers run side by side for
  500 ms each, against media with decorrelation times τ = 30 ms and
  340 ms. The medium model lets every segment's transmission drift as an
  Ornstein–Uhlenbeck process, and the PMT noise is about twice the mean
  speckle level. In steady state the enhancement is about 54 for τ = 30 ms
  and about 372 for τ = 340 ms. After the loop stops, the fast sample's
  focus falls from 46 to 2.5 within 90 ms. This takes about 45 s of
  simulation.

The model is idealized in other ways, such as linear mirror travel and
perfect polarization and fibre coupling. The enhancements it reaches are
therefore several times higher than measured optical values. The published
setup reaches about 120 after one sweep and about 210 after several on
ground glass, and about 10 (τ = 30 ms) to 110 (τ = 340 ms) on the dynamic
samples. The trends are the same: a focus forms within about τ, its
strength grows with τ, and it decays after the optimization stops.

### Running with Verilator

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/wfs_pkg.sv tb/tb_wfs_full.sv --top-module tb_wfs_full -o sim
./obj_dir/sim
```

The same command runs any other testbench: change the file and
`--top-module`. To lint the synthesizable part:

```
verilator --lint-only -Wall -Irtl -y rtl rtl/wfs_pkg.sv rtl/wfs_top.sv --top-module wfs_top
```

## Limits and departures

- **Behaviour at the edges.** The FPGA's logic is shown to do what the
  publication describes, against a behavioural model of the optics and
  instruments. The model fixes the behaviour at the system's edges: linear
  mirror travel, a frame-latched SLM driver that applies a whole mask at
  once, and a DAQ that answers with three words. Real instruments need
  these points checked: the trigger instants against the mirror's actual
  motion, and the sample link against the DAQ's actual transfer mechanism.
- **Mode computation.** The published timing diagram shows mode computation
  twice per iteration: during the dephasing and during the settling. Here
  it happens once, during the settling, which is where the text puts it.
- **Mirror overdrive.** Overdriving the mirror to shorten the 100 µs travel
  is mentioned in the publication only as a future improvement. It is not
  built.
- **Outside the RTL.** The mirror, the PMT, the DAQ boards, the monitoring
  camera and the host software are instruments outside the FPGA.
