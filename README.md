# Clock, trigger and READY distribution across several PXI chassis

A detector array with several hundred channels needs more digitiser modules than one
PXI chassis holds. All of them must still sample on a common clock and start
acquiring on the same trigger. They also need one signal that tells the trigger
source whether every module, in every chassis, is ready. Inside one chassis the
backplane already does this. Across chassis it is done here by one small rear-I/O
board per chassis, called P16Trigger in this document. The boards are linked by
CAT-5 cables in a star whose centre is the board in the *director* chassis. The
director chassis holds the module that decides when to trigger.

The boards have three jobs:

* **Clock.** The director's board takes a 50 MHz clock, either from its own
  oscillator or from a digitiser module, and drives it down every cable. One of
  those cables loops back into the director's own input. As a result every chassis,
  the director's included, receives its clock through the same kind of cable. Each
  board hands the received clock to the module in slot 2, which drives the chassis'
  backplane clock tree. The digitisers double it to 100 MHz themselves.
* **Triggers.** The director's board sends 3 trigger signals to up to 8 chassis, or
  6 signals to up to 4. Each receiving board drives them onto its own backplane.
* **READY, by reversed signalling.** Any trigger signal can be turned round. On a
  reversed signal, each board picks the chassis-wide READY line off its backplane
  and sends it *back* up its cable. The director's board then drives the AND of
  everything that comes back onto the director's backplane, as system-wide READY.
  Within a chassis, READY is a wire-OR line: any module that is busy pulls it low.

The RTL here is the logic of this scheme: source selection, fan-out, per-signal
direction, the mapping of signals onto cable pairs, the READY AND and the wire-OR.
The boards themselves are LVDS buffers, so everything is combinational and there
are no flip-flops. The analog side is not modelled. That covers buffer delay (about
18 ns from backplane to backplane in the reference measurements), skew (about 1 ns
between chassis), clock jitter and signal quality. The RTL says *where* each signal
goes, not *when* it arrives.

## Files

| file | contents |
|------|----------|
| `rtl/p16t_pkg.sv` | sizes, the `clk_src_e` and `trig_mode_e` encodings and the board configuration record `p16t_cfg_t` |
| `rtl/p16t_clock_dist.sv` | clock source select, fan-out to the output connectors, received clock to the PXI path |
| `rtl/p16t_trigger_line.sv` | one trigger signal: normal fan-out, or reversed return plus AND |
| `rtl/p16trigger.sv` | one board: clock path plus six trigger lines, mapped onto the connector pairs |
| `rtl/ready_wire_or.sv` | a chassis' wire-OR READY line |
| `rtl/ddas_sync_top.sv` | four chassis, each with one board and one READY line, plus the cabling |
| `tb/*_tb.sv` | one self-checking testbench per module above, plus `two_chassis_bench_tb` |

## Signal directions: source line and distribution line

The directions are the least obvious part of the design, so they come first. Each
trigger signal `s` appears on each backplane as **two** lines:

* the **source line** `bp_src[s]`, which the director module drives into the
  board. This is probe point "T1" in the reference measurements.
* the **distribution line** `bp_dist[s]`, which the board drives to every module in
  its chassis. These are points "T2" and "T3".

With `cfg.reversed[s] = 0` (normal signalling):

```
director chassis:  bp_src[s] --> every cabled output connector, pair of s
every chassis:     input connector, pair of s --> bp_dist[s]
```

With `cfg.reversed[s] = 1` both backplane lines, and every cable pair of `s`,
change direction:

```
every chassis:     bp_dist[s] (chassis READY) --> input connector, pair of s
director chassis:  AND over cabled output connectors, pair of s --> bp_src[s]
```

Only the board with `cfg.master = 1` drives its output connectors and, in reversed
mode, the source line. In an output connector without a cable (`cfg.port_en[k] = 0`)
the driver stays off, and that connector counts as true in the AND. Every pin that
can change direction is modelled as an `_i`/`_o`/`_oe` triple, the way the
bidirectional buffers would be wired. `ddas_sync_top` contains a deferred assertion
that no cable pair is ever driven from both ends. That would happen if the two boards
disagreed about the direction of a signal.

## Cable pairs and the two trigger modes

A CAT-5 cable has four twisted pairs. This design uses one pair for the clock and
three for triggers. Each board has 8 output connectors and 2 input connectors (A
and B).

| mode (`cfg.mode`) | signal `s` on output connector `k` | on the input side | receivers |
|---|---|---|---|
| `TRIG_3X8` | `s` = 0..2 on pair `s` of every connector | connector A, pair `s` | 8, one cable each |
| `TRIG_6X4` | `s` = 0..2 on pair `s` of even `k`; `s` = 3..5 on pair `s-3` of odd `k` | A for 0..2, B for 3..5 | 4, two cables each |

Both modes use the same 24 trigger pairs (8 × 3 = 4 × 6). Signals 3..5 are off in
`TRIG_3X8`. Only connector A's clock pair is used.

`ddas_sync_top` cables director connector `2c` to input A of chassis `c`, and `2c+1`
to input B. This works for both modes with up to 4 chassis. For 5 to 8 chassis
(`NUM_CHASSIS` > 4) it cables connector `c` to input A only, which supports the
3-signal mode only. An open pair reads high, as an LVDS receiver with fail-safe
biasing would.

## Configuration

`p16t_cfg_t` is static: set it before use, as you would set jumpers.

| field | meaning |
|---|---|
| `master` | this board is in the director chassis: it sources the clock, sends triggers and forms the READY AND |
| `clk_src` | `CLK_FROM_OSC` (on-board oscillator) or `CLK_FROM_PIXIE` (clock from a digitiser module) |
| `mode` | `TRIG_3X8` or `TRIG_6X4` |
| `reversed[5:0]` | per signal: 1 = reversed (READY-style) signalling |
| `port_en[7:0]` | output connectors with a cable attached |

Every board in a system must have the same `mode` and `reversed`. Only the
director's board has `master` set.

## The chassis READY line

`ready_wire_or` models the open-collector line that all modules in a chassis share.
A present module that is not ready pulls the line low, so the line is high only when
every present module is ready. In `ddas_sync_top`, each chassis' line drives every
reversed distribution line of that chassis. (In the real system, one module relays
the line's state onto the reversed line.) `SLOTS` = 14 is this design's choice:
fourteen 16-channel modules is the nearest whole number to about 226 channels per
chassis.

## What comes from the reference system and what is this design's own

These come from the reference system:

* the 50 MHz clock, chosen from a module's clock or an on-board oscillator, sent to
  up to 8 receivers including the source board itself;
* the received clock fed to the slot-2 module, which feeds the chassis clock tree;
* 3 trigger signals to 8 receivers, or 6 to 4;
* per-signal reversal, with the AND of the reversed signals on the director's
  board;
* the wire-OR READY line in each chassis;
* four chassis.

These are this design's own choices:

* three trigger pairs per cable, and the pair mapping above;
* the second input connector;
* the `port_en` mask, and open connectors counting as true in the AND;
* fail-safe-high open pairs;
* the `_i/_o/_oe` pin model;
* one fixed director chassis (chassis 0) in the top;
* every reversed line carrying the chassis READY;
* 14 slots per chassis.

Some parts are not included: the LVDS buffers as analog parts, the oscillators, the
backplane's PXI clock buffer, and the digitiser modules themselves. The last group
covers their clock doubler, ADCs, FPGAs and their firmware, DSP, memories and PCI
interface. It also covers the director's coincidence logic. The top's ports take the
place of all of these.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl rtl/p16t_pkg.sv rtl/p16t_clock_dist.sv \
    rtl/p16t_trigger_line.sv rtl/p16trigger.sv rtl/ready_wire_or.sv \
    rtl/ddas_sync_top.sv tb/ddas_sync_top_tb.sv --top-module ddas_sync_top_tb
./obj_dir/Vddas_sync_top_tb
```

For another testbench, replace the last file and `--top-module`. The package must be
read first. The testbenches' delays are in nanoseconds, hence `--timescale`.

* `p16t_clock_dist_tb`: random levels. It then runs real 50 MHz clocks with output
  connector 0 looped back to the input, and checks that the PXI clock follows the
  selected source with 50 rising edges per µs.
* `p16t_trigger_line_tb`: 2000 random cases against the direction rules, including
  the AND.
* `p16trigger_tb`: 3000 random configurations and pin levels, against a reference
  that works out which signal owns each connector pair.
* `ready_wire_or_tb`: directed and random slot patterns.
* `ddas_sync_top_tb`: the full four-chassis system at its default size. It goes
  through six configurations:
  1. oscillator clock, 3 signals
  2. module clock, 3 signals
  3. 6 signals
  4. a reversed READY signal in 3-signal mode
  5. two reversed signals in 6-signal mode
  6. one chassis unplugged

  In each it checks every chassis' PXI clock (50 edges per µs), each delivered
  trigger, each chassis READY line and the system-wide READY. It counts each
  mechanism and fails if any never occurred.

* `two_chassis_bench_tb`: a two-chassis bench set-up (`NUM_CHASSIS = 2`). It
  checks that a pulse train on the director's source line appears identically on
  both chassis' distribution lines. It then checks that two independent square
  waves standing in for the chassis READY lines come back as their AND.

Because the logic is combinational, the testbenches apply inputs, wait 1 ns and
compare. Their checks stay clear of clock edges.
