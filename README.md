# Per-user laser timing for a 1×N plug-and-play QKD server

In a plug-and-play quantum key distribution (QKD) network, one server holds
the lasers and the single-photon detectors. Each user only reflects and
encodes the light. The server sends a laser pulse down the user's fibre. The
pulse comes back attenuated to single photons and hits a pair of gated
avalanche photodiodes (APDs). All users share that one APD pair by time
division: gate 1 belongs to user 1, gate 2 to user 2, and so on, with the
sequence repeating.

The hard part is timing. A photon is only detected if it reaches the APDs
inside its own gate. The round trip through kilometres of fibre differs from
user to user, and it drifts by nanoseconds as the fibre warms and cools. So
every user's laser must fire at its own time, set with sub-nanosecond
precision, and that time must be re-tuned while the network runs.

This RTL is the server's timing FPGA for such a network, with 64 users. Each
user has an independent *timing control module*. It places the laser trigger
in two steps:

* **Coarse:** a 1.6 GHz serializer puts the pulse on any 625 ps bit of the
  laser period.
* **Fine:** two programmable I/O delay elements add 0 to 22 steps of 50 ps.
  That range covers one serializer bit.

Together they give 50 ps resolution over the whole period. A host control
program watches each user's key rate and error rate and rewrites that user's
coarse and fine settings. This re-tuning is the path-length compensation. The
FPGA also makes the APD gates, drives the server's two phase modulators
from a random number generator, and records the raw key, one record per gate.

## Clocks and units

| quantity | value | origin |
|---|---|---|
| bit clock `fclk` | 1.6 GHz, 625 ps = coarse step | serializer rate of the scheme |
| word clock `pclk` | `fclk`/16 = 100 MHz, 10 ns | this design's 16:1 ratio |
| fine step | 50 ps, 0..22 steps (15 + 7) | 50 ps and 22 steps from the scheme; the 15 + 7 split is this design's |
| max. laser rate | 10 MHz = period of 10 words | scheme |
| gate rate | 10 MHz, fixed | scheme |
| users | 64 | scheme |

All control logic runs on `pclk`. Only the serializer's shift register runs
on `fclk`. In `pll`, `pclk` changes on the falling edge of `fclk`. The
serializer can therefore sample `pclk` on the rising edge of `fclk` to find
word boundaries.

## Signal path of one user (`timing_control_module`)

```
host regs ──coarse──► data_uploader ─16b/10ns─► serializer ──ser_o──► (board LVDS loop)
          ──period──►                 (D-FF + transmitter, 625 ps/bit)          │
          ──fine────► delay_control ─serial─► io_config ─► dyn.delay 15 ─► dyn.delay 7 ─► laser_o ─► AMP ─► laser
                                                          ▲ ser_loop_i ◄──────────────┘
```

* **data_uploader** counts words over the laser period. In every word it
  marks the bits `p` for which `(p − coarse) mod (period·16) < 3`. This gives
  a 3-bit (1.875 ns) pulse that may straddle two words or wrap around the end
  of the period. Bit 0 of a word is sent first.
* **serializer** registers the word on `pclk` (the D-FF). It loads the word
  into a shift register on the next rising edge of `fclk` and shifts it out
  LSB first.
* The serial stream leaves the chip as `ser_o` and must come back on
  `ser_loop_i`. In the original scheme the serializer's differential output
  cannot feed the delay line directly, so it is looped through the board.
  The top exposes both ends.
* **delay_chain** is two `dynamic_delay` elements in series, configured by
  **io_config**. **delay_control** converts a request `f` (0..22) into
  `min(f,15)` steps for the first element and the rest for the second. It
  shifts the 7 setting bits into `io_config`, MSB first, and then pulses
  update. A new request takes effect 9 word clocks after it changes.
  Requests above 22 are clamped.

**Timing law.** Measured from the `pclk` edge on which `restart` is sampled,
the rising edge of `laser_o` falls at

    20 312.5 ps + coarse × 625 ps + fine × 50 ps   (mod period × 10 ns)

This holds when the board loop is ideal. The 20 312.5 ps is two word clocks
of pipeline plus half a bit. The pulse lasts 1875 ps and repeats every
`period` words. `tb_timing_control_module` checks this law for random
settings.

`dynamic_delay` is a **behavioural model**, a chain of 50 ps transport
buffers and a tap multiplexer. A real device uses the FPGA's I/O delay
primitive, and `io_config` stands for its configuration port. `pll` is
likewise a behavioural model of the FPGA PLL. All other modules are
synthesizable.

## Time-division detection

`gate_generator` counts `gate_period` words, 10 by default, which gives
10 MHz. In each period it pulses `pm_fire_o` at count `pm_phase` and `gate_o`
at count `gate_phase`. Every strobe carries `slot_o`, which counts
0 … `num_slots`−1 and then wraps. With four users, gates 1–4 go to users 1–4
and gate 5 to user 1 again. Each user's laser then runs at 10 MHz/4 =
2.5 MHz (laser period 40). If a user leaves, the host lowers `num_slots` and
the laser period, and the remaining users run faster.

Slot *s* is user *s*: the per-user polarization bit is looked up by slot
number. A user who leaves from the middle of the list therefore needs the
host to renumber users. The end-to-end test removes the last user.

The light of half the users is vertically polarized and reaches phase
modulator PM_B1. The other half is horizontal and reaches PM_B2. On each PM
strobe, `pm_driver` takes the QRNG bit as the basis. It then sets the DAC
code (`pm_code0` or `pm_code1`) of the PM that serves the slot's user, and
leaves the other PM unchanged. With users 1 and 3 vertical and users 2 and 4
horizontal, each PM changes at 5 MHz.

`raw_key_recorder` ORs APD clicks into a window that runs from one gate to
the next. At each gate it emits a record for the previous gate:
`{seq, slot, basis, click[1:0]}`. For the basis to be fresh, `gate_phase`
must be at least `pm_phase + 1`. The host takes records with
`rec_valid`/`rec_ready`. If a new record is due before the old one was
taken, the old one is overwritten and `drop_count` is incremented. Splitting
the records by user is left to the host software, keyed by `slot`.

## Register map (`host_regs`, 32-bit write bus on `pclk`, combinational read)

| address | register |
|---|---|
| 0x000 | CTRL: writing bit 0 restarts every laser counter and the gate counter in the same clock |
| 0x001 | laser period in words (reset 10) |
| 0x002 | gate period in words (reset 10) |
| 0x003 / 0x004 | gate phase / PM phase within the gate period |
| 0x005 | number of slots (reset 1) |
| 0x006 / 0x007 | PM DAC code for basis 0 / basis 1 |
| 0x010 + l | read only: temperature reading of tunable laser l (0..7), from `laser_temp_i` |
| 0x100 + 4·u + r | user u: r=0 enable, 1 coarse (bits), 2 fine (steps), 3 polarization (0 = PM_B1) |

The host bus and the address map are this design's own.

## Path-length compensation, as the testbench runs it

The compensation loop runs in host software and is not part of the RTL.
`tb_qkd_timing_top` plays the host and shows how the hardware is meant to be
used:

1. Set each user's coarse and fine values from the nominal distance. The
   target is the time that puts the returning photon in the user's gate.
2. Watch the clicks of each slot.
3. When a user's clicks stop, sweep the fine steps and the neighbouring
   coarse bits until the clicks return.

The fibre model uses the four field distances (5.8, 9.9, 2.9 and 7.7 km) at
4.9 ns/m. It reduces each round trip modulo the frame, which is all that the
periodic schedule sees. The detection window is ±100 ps. The test covers:

* a +300 ps drift, recovered with the fine delay only;
* a −1.4 ns drift, which needs a coarse move;
* a 5.2 ns jump of one user, the largest shift seen in the field over
  100 minutes, found by sweeping the total delay outward in 50 ps steps;
* a 28 ns drift of another user, the largest seen over 100 hours, tracked
  in seven 4 ns steps;
* a slow host that loses records;
* a user leaving, after which the laser rate rises to 3.33 MHz;
* all 64 users running at once, each firing once per 6.4 µs frame at its own
  50 ps-resolved position.

## Files and simulation

`rtl/qkd_pkg.sv` holds the shared constants and the types `user_cfg_t`,
`global_cfg_t` and `raw_rec_t`. Every module is in `rtl/<module>.sv`, and
every testbench is in `tb/tb_<module>.sv`. Each testbench checks itself and
prints `TB_RESULT checks=N failures=M`. Example:

```
verilator --binary --timing --assert rtl/qkd_pkg.sv rtl/*.sv tb/tb_qkd_timing_top.sv \
          --top-module tb_qkd_timing_top -Wno-fatal
./obj_dir/Vtb_qkd_timing_top
```

The end-to-end test runs with every parameter at its default (64 users). It
takes about 1.5 minutes of simulation. The other tests take seconds. Every
file has its own `` `timescale 1ps/100fs ``.

## How far to trust it, and where it departs from the source scheme

The scheme fixes the following:

* the block structure: data uploader → serializer (PLL, D-FF, transmitter)
  → LVDS loop → delay chain (IO configuration, two dynamic delays, output
  buffer) driven by a delay control block;
* 64 independent modules;
* the 1.6 GHz serial rate, 50 ps steps and 22-step range;
* the 10 MHz gates and the 10 MHz maximum laser rate;
* laser rate divided by the number of users;
* round-robin gate-to-user assignment;
* PM_B1 and PM_B2 selected by polarization;
* raw key made of clicks and PM random bits, divided by the host.

This design chose the following:

* the 16:1 serialisation ratio and the 100 MHz word clock;
* the 3-bit trigger width, chosen to approximate the 2 ns laser pulse;
* the 15 + 7 split of the delay steps and the serial configuration protocol;
* every register width, the host bus and the register map;
* 10 ns resolution for the gate and PM strobe positions;
* the one-gate click window and the record format;
* the one-deep record buffer with a drop counter;
* the reset sequencing: internal reset is released two word clocks after
  PLL lock.

Not included:

* the lasers and their temperature control (the FPGA only passes the eight
  temperature readings, assumed 16 bits wide, to the host), the amplifiers,
  the APDs, the QRNG, the PM DACs and all optics;
* the host control program: sifting, key rate and error-rate monitoring, and
  the compensation decisions.

The I/O pads are plain wires. The delay element and the PLL are behavioural
models, so synthesis sees only their ports. An FPGA build must replace them
with the vendor primitives.
