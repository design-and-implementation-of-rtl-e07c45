# An 80-channel trigger generator for a photocathode-gun test stand

A small accelerator test stand needs a few dozen to a hundred trigger pulses per
machine shot: for the gun RF, the drive laser, the modulators, cameras and beam
diagnostics. Each trigger has its own delay and width relative to the shot, the
shots repeat at 1 to 100 Hz, and all of them must stay within well under a
nanosecond of each other. The system this RTL belongs to makes all of them in
one FPGA on a core logic board (CLB) in a VME crate. Every output has a
dedicated line to its connector: the J2 connector of the crate is rewired by a
passive backplane into point-to-point lines from the CLB to five output
boards, each with 16 channels. Because each trigger is simply a counter
output registered on the one core clock, the timing of every channel is fixed
by the clock alone. No bus, packet or event decoding stands between the counter
and the pin.

The RTL here is the digital part of that system: the FPGA logic of the core
logic board and the logic of the remote opto-electrical terminals. It was
written from the published description of the system (Zhu et al., "Design and
implementation of a high-density sub-nanosecond timing system for a C-band
photocathode electron gun test platform"). That description gives the
functions and the numbers, not the firmware. Counter structure, register map,
serial protocol and the board-to-board reset code are therefore this design's
own, and each file says which is which.

## How one trigger is made

```
 serial ──uart──host_regs──┬─ rate config ──► rate_generator (x2 groups) ──tick──┐
                           ├─ channel config ─────────────────────────────────► trigger_channel (x80)
                           └─ tap values ──► tap_loader (x80)                     │
                                                   │ RST/CE/INC                   ▼
                                                   └──────────────► ODDR2 ─► IODELAY2 ─► j2_out[slot][bit]
```

* **Rate tick.** A `rate_generator` divides the core clock to the repetition
  rate and raises `tick` for one clock per period. The rate is chosen from
  the operator's menu: 1, 5, 10, 20, 25, 50 or 100 Hz, with periods
  `CLK_HZ/f` worked out at elaboration. A free custom period is also
  available. There are two rate groups, so two families of triggers can run
  at different rates. Each channel picks its group.
* **Delay and width.** Each `trigger_channel` is restarted by its group's
  tick. A down-counter first counts off the delay, then the width. The unit of
  both is one core clock: 10 ns on the 100 MHz crystal. Both fields are 24 bits
  wide, which covers the required 0 to 10 ms (10^6 counts) with margin.
* **Exact timing.** Take the tick to be high in clock cycle *t*. The channel
  register is then high in cycles *t+1+delay* … *t+delay+width*. At the pin
  the pulse comes half a clock later still. The ODDR2 output register samples
  the channel on both clock edges, and the falling edge passes it on first.
  The pin then gains `tap × 200 ps` of fine delay. Measured from the clock
  edge that ends the tick cycle, the rising edge is at
  `(delay + 0.5) × Tclk + tap × 0.2 ns` and the width is exactly
  `width × Tclk`.
* **Restart rule.** A new tick always restarts the channel. A delay plus width
  longer than the period is cut short at the next tick; it never overlaps the
  next shot. A width of 0 gives no pulse.
* **Gating and bursts.** A channel is `CH_OFF` (silent), `CH_CONT` (a pulse
  on every tick) or `CH_BURST`. A burst channel sends `burst_count` pulses
  after it is armed and then stays quiet. It is armed by writing its mode or
  its burst count. A per-channel counter of pulses sent since arming can be
  read back.

## Clock and resolution

All FPGA logic runs on one core clock. It is either the 100 MHz crystal or
the machine RF reference after the board's clock conditioning. With the
648 MHz RF of the test stand, the reported 6.18 ns delay step is 4/648 MHz,
which points to the RF being divided by four, to 162 MHz. The board brings
both sources to the FPGA as separate global clock inputs, so the switch and
the divider belong in the FPGA's clock resources (a global clock multiplexer
and a clock manager). They are not part of this RTL: it has a single clock
input, and the register bit `rf_clk_sel` is brought out as a port to drive
that multiplexer. The counter widths are sized to hold 10 ms and 1 Hz at
162 MHz too (24 and 28 bits). On the RF clock the menu rates, which are
computed for `CLK_HZ`, no longer hold, so the custom period is used instead.
The UART's bit timing also assumes `CLK_HZ`. A board that really switches
clocks would run the serial port from the crystal. That would need a clock
crossing, which this RTL does not have.

## Linking two crates: the reset embedded in a clock stream

For 160 channels, two crates work as one. Board B sends its core clock over
one fibre to board A, and A runs from it. Over a second fibre, A sends back a
reset that re-phases B's rate counters. Both crates then tick in the same
clock cycle, up to a fixed offset. A transceiver's standard serial path
(elastic buffer, comma alignment) would make that offset vary by a parallel
clock from one power-up to the next. The link therefore uses no transceiver
protocol. It uses a plain DDR output and input register on general I/O.

* **Line format** (`sync_encoder`). The line carries two half-bits per core
  clock, a 200 Mb/s line, through an ODDR2. At rest every cycle sends 1,0,
  which is simply the 100 MHz clock. A reset is the word
  `11 11 00 00`, sent over four cycles. It has four ones and four zeros, so
  its average is the same as the clock's. Its longest run is four half-bits
  (20 ns), so the optical module sees the same DC balance and nearly the same
  transition density as at rest. Two equal half-bits in a row never happen
  at rest, so the word cannot be mistaken for idle.
* **Receiver** (`sync_decoder`). An IDDR2 samples the line on both clock
  edges. The decoder keeps the last nine half-bits and looks for `11110000`
  at both half-bit offsets. Which offset matches depends only on where the
  incoming edges fall within the local clock. For a given pair of boards and
  fibres that position is fixed, so the recovery latency is fixed too. A
  link supervisor accepts words only while the idle clock pattern has been
  seen: `link_ok` rises after 16 idle cycles and falls after 8 non-idle
  ones. A dead or noisy fibre therefore cannot re-phase the board.
* **Who resets whom.** The `master` register bit selects the role. On the
  master, a sync request (control register bit 2) starts a word and re-phases
  the board's own rate generators in the same cycle. On the slave, the
  recovered pulse re-phases them. The slave's ticks then lag the master's by
  a constant, the link latency: encoder, fibre, IDDR2 and four decoder
  cycles. It is the same after every sync. The constant is not compensated
  in logic. It is taken out with the channel delays during commissioning.
  The slave's outgoing stream is its plain forwarded clock.

## Fine delay and its calibration

The residual skew between channels, from traces and backplane, is removed at
the output. Each channel pin is driven through an ODDR2 and then an IODELAY2
used as an output delay line with nominally 200 ps taps. The tap of each
channel is a register (`O_TAP`). A `tap_loader` per channel writes it into
the delay line after reset, and again whenever control bit 3 is written. It
pulses `RST` to return the line to tap 0, then sends *N* `CE`+`INC` steps
with one idle clock between them, so a load of tap *N* takes 2+2*N* clocks.
Status bit 0 reports when all channels are loaded. The calibration itself is
done off-line: the slowest channel is the reference, and every other channel
gets the taps that bring it level. The delay line's real taps are not
uniform. The model uses ideal 200 ps steps.

ODDR2, IDDR2 and IODELAY2 are Spartan-6 primitives. The files
`oddr2_model.sv`, `iddr2_model.sv` and `iodelay2_model.sv` are behavioural
simulation models of the ports this design uses. They are not for synthesis.
On the FPGA the vendor primitives take their place, under the same port
names. `iodelay2_model` has one extra observation port, `TAP_VALUE`.

## Serial protocol and register map

The board talks to a serial server at 115200 baud, 8N1. The control
system's device support speaks this byte protocol:

| command | bytes | reply |
| --- | --- | --- |
| write | `'W'` A1 A0 D3 D2 D1 D0 | `'K'` |
| read  | `'R'` A1 A0 | D3 D2 D1 D0 |
| anything else | one byte | `'E'` |

Addresses are 16-bit word addresses. Data is 32 bits, sent most significant
byte first. Unmapped addresses read as 0.

| address | register | bits |
| --- | --- | --- |
| 0x0000 | control | [0] master, [1] RF clock select, [2] send sync (self-clearing), [3] reload taps (self-clearing) |
| 0x0001 | id (read-only) | number of channels |
| 0x0002 | status (read-only) | [0] taps loaded, [1] a sync has re-phased this board |
| 0x0010 + 2g | group g rate | 0..6 = 1/5/10/20/25/50/100 Hz, 7 = custom |
| 0x0011 + 2g | group g custom period | clocks per period (minimum 2) |
| 0x0100 + 8c + 0 | channel c delay | clocks, 24 bits |
| … + 1 | width | clocks, 24 bits (0 = no pulse) |
| … + 2 | mode | 0 off, 1 continuous, 2 burst; writing arms |
| … + 3 | burst count | 16 bits; writing arms |
| … + 4 | group | 0 or 1 |
| … + 5 | fine-delay tap | 0..255 |
| … + 6 | pulses since arm (read-only) | 32 bits |

After reset, every channel is off with zero delay and width. Both groups run
at 10 Hz, the board is master, and the crystal clock is requested.

## Outputs and slots

Channel *c* leaves on `j2_out[c/16][c%16]`. Index 0…4 of `j2_out` stands for
VME slots 2, 3, 5, 6 and 7; the CLB itself sits in slot 4. The level
translators, the passive J2 backplane and the optical or electrical output
boards come after this point. They are pure hardware and are not modelled.

## Remote terminals

Optical triggers are turned back into electrical ones by small boxes built
around a CPLD (`terminal_cpld`). The trigger path through the CPLD is
combinational. Its delay is the device's fixed pin-to-pin delay, which is
the reason a CPLD is used here. There are two variants:

* **Standard** (`N_IN=2, FANOUT=1`): two optical inputs, each to one
  electrical output. A box holds two such boards.
* **High-fanout** (`N_IN=1, FANOUT=10`): one optical input to ten outputs.

Each input is also re-sent on the unit's fibre transmitter for daisy
chaining. The source is the fibre input, or with `REPEAT_ELECTRICAL=1` the
local electrical input. The CPLD's own clock drives only the front-panel
LED. The LED is lit for `LED_HOLD` clocks after any input edge, so that
10 ns triggers at 1 Hz are still visible. The top `timing_system` includes
one terminal of each variant, so that the whole system is one design. Their
fibre inputs are top-level ports, because fibres and transceivers lie
between them and the CLB outputs.

## Files

| file | content |
| --- | --- |
| `rtl/timing_pkg.sv` | widths, enums (`rate_sel_e`, `ch_mode_e`), config structs, register map, serial command bytes |
| `rtl/timing_system.sv` | top: CLB logic (80 channels, 2 groups, link) plus the two terminal variants |
| `rtl/rate_generator.sv` | repetition-rate divider |
| `rtl/trigger_channel.sv` | delay/width/burst channel |
| `rtl/uart.sv` | 8N1 serial port |
| `rtl/host_regs.sv` | command parser and register file |
| `rtl/sync_encoder.sv`, `rtl/sync_decoder.sv` | reset word in the clock stream |
| `rtl/tap_loader.sv` | delay-line tap loading |
| `rtl/oddr2_model.sv`, `rtl/iddr2_model.sv`, `rtl/iodelay2_model.sv` | behavioural models of the vendor I/O primitives |
| `rtl/terminal_cpld.sv` | remote terminal logic |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_timing_system.sv` | two linked boards, end to end, at reduced size (32 channels, 10 MHz, 625 kbaud) |
| `tb/tb_timing_system_full.sv` | the same test with every parameter at its default (80 channels, 100 MHz, 115200 baud) |
| `tb/tb_rf_clock_steps.sv` | one board on the 162 MHz RF-derived clock: one-count delay steps of 6.17 ns, custom 1 ms period |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
A watchdog ends it with a failure if it hangs. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/timing_pkg.sv \
          tb/tb_trigger_channel.sv --top tb_trigger_channel -o sim && ./obj_dir/sim
```

`-Wno-fatal` is needed because Verilator stops on width warnings by default,
and the testbenches mix 32-bit integers with narrower register fields. The
RTL gives a single warning: the delay-line model's delay may be zero, which
is what tap 0 means.

Use the same command for every other testbench, with its name in place of
`tb_trigger_channel`. The delay-line model needs `--timing`, because it
delays each edge with `#`. The reduced end-to-end test runs in about 20 s.
The full-size one simulates 100 ms with two 80-channel boards and takes
about 4.5 minutes. Most of that time goes to the 80 delay-line models per
board.

The end-to-end test configures both boards over their serial lines. It then
checks, at the output pins and against times computed from the register
values:

* the rise time and width formula above;
* a 5-tap (1.0 ns) offset between two otherwise equal channels;
* a 100 Hz train of 9.9 ms gates;
* a pulse cut short by the next tick;
* a 2-pulse burst, with its read-back;
* a silent channel that is off;
* a channel on the second rate group;
* a rate switch;
* two syncs over the link, starting from different phases, that leave the
  slave at the same tick offset;
* the terminals repeating every pulse.

It counts each of these mechanisms and fails if one never occurred.

`tb_rf_clock_steps` runs one 16-channel board at 162 MHz, the clock that the
6.18 ns step implies, with the serial port at 115200 baud. Four channels
with delays *d* … *d*+3 come out one clock period (6.17 ns) apart. A channel
with a delay of 150,000 counts lands where the formula puts it, and the ticks
are exactly one custom period (162,000 clocks, 1 ms) apart. It runs in a few
seconds.

## Where this design departs from, or adds to, the published system

* **Own design choices, not from the source:**
  * the serial protocol and register map;
  * the 24/28-bit counter widths;
  * the restart-on-tick and burst semantics;
  * the reset word `11110000` and its 200 Mb/s DDR line;
  * the link supervisor;
  * reset-then-increment tap loading;
  * the LED behaviour and the fibre re-send selection of the terminal.
* The rate menu includes 20 Hz, which the operator panel offers but the
  requirement table does not list. The custom period is an addition. It is
  also how RF-locked rates are set.
* Delay and width both step by one core clock. The requirements list 10 ns
  (or one RF period) for both, while an earlier passage speaks of coarse
  1 µs steps for the width. A 1 µs step is simply a width that is a multiple
  of 100 counts, so the operator software can offer it without any change
  here.
* The high-fanout terminal has ten outputs, as the text states. The block
  diagram draws four.
* **Not in the RTL:**
  * the clock switch between crystal and RF;
  * the RF divider;
  * any logic compensation of the link latency;
  * VME bus access;
  * the GTP serial links, which are only named;
  * the alarm limits, which live in the operator software.
* **Single clock domain.** The serial port shares the core clock.
* **Ideal primitive models.** The I/O primitive models are ideal: uniform
  taps, no PVT drift, no jitter. Sub-nanosecond behaviour, jitter and skew
  are properties of the board and cannot be judged from this RTL.
