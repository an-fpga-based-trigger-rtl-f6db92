# CSHINE trigger logic in SystemVerilog

A heavy-ion experiment at Fermi energies produces many kinds of reaction
products at once. The data acquisition can only read a small part of the
events: each readout blocks it for 80 to 200 µs. The trigger therefore has to
pick the event classes the physics needs, such as fission with a light
charged particle or fission with a high-energy gamma. It must also keep a
thinned inclusive stream for calibration, and never hand the DAQ an event
while it is still busy.

This is RTL for the trigger of CSHINE (Compact Spectrometer for Heavy IoN
Experiment), the one that was run in the user FPGA of a general-purpose VME
logic module. It rebuilds the published trigger scheme: a handful of logic
inputs from the detector front ends, coincidences between them, and one
programmable Gate and Delay Generator (GDG) at every place where signals
have to be lined up in time. Added to that are the DAQ busy/veto circuit,
monitor scalers and an SPI register file that holds every timing setting.

## The detectors and their logic inputs

| input | comes from | meaning |
|---|---|---|
| `gamma_t[15:0]` | fast timing outputs of the CsI(Tl) gamma hodoscope (15 crystals installed, 16 inputs) | a crystal fired |
| `ssd_m1` | OR of the trigger outputs of the silicon-strip amplifiers | at least one light charged particle (LCP) in the silicon telescopes |
| `ssd_m2` | discriminator on the summed strip multiplicity (threshold above 150 mV at 100 mV per hit) | at least two LCPs |
| `ppac_t[2:0]` | constant-fraction discriminators on the cathodes of PPAC1..3 | a fission fragment hit that avalanche counter |

PPAC1 is the main fission-fragment counter. PPAC2 and PPAC3 sit on the other
side of the beam, so a fission event is PPAC1 together with PPAC2 or PPAC3.
PPAC2 with PPAC3 is not a fission event, because both are on the same side.

All inputs are asynchronous, active-high logic levels. Each passes a two-flop
synchroniser into the single 50 MHz clock domain. A copy of the raw gamma
inputs also leaves on `gamma_tdc`, without resynchronisation, for the TDCs.

## The trigger scheme

```
gamma_t[i] -> GDG (x16) -> OR ---------> GDG ---------------- gamma M1 --+
ssd_m1 ----------------------------------> GDG ---------------- SSD M1 ---+
ssd_m2 ----------------------------------> GDG ---------------- SSD M2 ---+
ppac_t[i] -> GDG (x3) -+-> (1&2)|(1&3) ----------------------- fission --+
                       |        '--------> GDG ---------------- PPAC M2 --+
                       '-> 1|2|3 ------------------------------ PPAC M1 --+
                                                                          |
   event types                              synchronisation GDG           |
   0 fission            fission                   200/200 ns  <-----------+
   1 two-body LCP       SSD M2                    200/320 ns
   2 fission & LCP      PPAC M2 & SSD M1          320/320 ns
   3 fission & gamma    PPAC M2 & gamma M1          0/320 ns
   4 LCP & gamma        SSD M1 & gamma M1           0/320 ns
   5 inclusive          SSD M1 | gamma M1 | PPAC M1 200/400 ns --> all_or
                                 |
        OR of the enabled types -+-> Trigger GDG 0/400 ns --> trigger
```

The unshaped fission OR drives the fission type. The GDG-shaped PPAC M2
(640 ns long) drives the two coincidences with an LCP or a gamma. The long
PPAC M2 gate is what lets the slower silicon signal find the fission signal.
The SSD signals pass MSCF-16 shaping amplifiers and arrive about 100 ns
after the PPAC signals.

The inclusive type has its own output, `all_or`. By default it is not part
of `trigger`, as in the original logic diagram. The published list of event
types does count it among the global trigger's types. Setting bit 5 of the
trigger mask adds it. Any type can be removed the same way.

## Gate and Delay Generator timing

Everything that decides whether two signals are in coincidence is a GDG
setting, so the GDG is the part to understand first (`rtl/gdg.sv`).

- A GDG reacts to a rising edge. If its input is first high in clock cycle
  `c`, the output is high in cycles `c + max(delay,1)` to
  `c + max(delay,1) + width - 1`.
- The register that drives the output counts as part of the delay. So a
  delay of 0 and a delay of 1 both take one cycle. Each GDG stage therefore
  costs at least 20 ns, even when its delay is set to 0.
- The delay is a shift register of 254 stages. An edge that arrives while
  an earlier one is still inside the delay is not lost.
- The output stage cannot be retriggered. An edge that reaches it while a
  pulse is being emitted is dropped, so pulses are at least one cycle apart.
- `width = 0` switches the channel off.

Settings are 8-bit numbers of 20 ns cycles: delays up to 5.1 µs, widths up to
5.1 µs. The reset values are the settings the experiment used:

| GDG | delay / width (ns) | | GDG | delay / width (ns) |
|---|---|---|---|---|
| each gamma crystal | 0 / 80 * | | PPAC M2 | 0 / 640 |
| gamma M1 | 20 / 80 | | sync fission | 200 / 200 |
| SSD M1 | 20 / 80 | | sync two-body LCP | 200 / 320 |
| SSD M2 | 20 / 320 | | sync fission & LCP | 320 / 320 |
| PPAC1..3 T | 20 / 400 | | sync fission & gamma | 0 / 320 |
| ALL OR | 200 / 400 | | sync LCP & gamma | 0 / 320 |
| Trigger | 0 / 400 | | | |

\* No setting was published for the per-crystal gamma GDGs. 0 / 80 ns is
this design's choice.

### Latency through the chain

Count cycles from the clock edge that first samples a PPAC edge. The
synchroniser takes two cycles. The PPAC T GDG takes one cycle and so does the
AND/OR (combinational, seen in the same cycle). The fission synchronisation
GDG takes ten cycles and the Trigger GDG one. The trigger therefore rises 14
cycles (280 ns) after that clock edge, which is 260 to 280 ns after the PPAC
edge itself. It also rises exactly 200 ns after the shaped PPAC M2. That
200 ns matches the oscilloscope picture of the beam run. The designers'
own pre-beam simulation gave 300 ns from the PPAC input. The 20-40 ns
difference is register latency inside the FPGA, which was not published.
With different latencies, move a synchronisation delay by one or two steps.

Other combinations, measured in the end-to-end testbench with the gamma
20 ns and the SSD signals 100-110 ns after the PPAC signals:

| event | trigger after the PPAC edge |
|---|---|
| fission | 275 ns |
| fission & gamma | 135 ns (the fission & gamma type fires first) |
| LCP & gamma | 195 ns |
| two-body LCP | 375 ns |
| fission & LCP only (others masked) | 495 ns |

The trigger itself is 400 ns long. When several types fire in one event,
the first to reach the Trigger GDG starts it, and the other types, arriving
while the 400 ns gate is open, are absorbed. The synchronisation delays
decide which type comes first, so they matter when types are masked.

## Busy and veto towards the DAQ

`rtl/daq_interrupt.sv` stands for the two NIM modules the experiment wired
between trigger and DAQ. The global trigger sets a latch that only the DAQ
controller's reset line clears. The controller pulses that line when the
event has been stored. The final trigger `fts` is the latch masked by the
DAQ busy level:

    fts = latched & ~daq_busy

The first trigger reaches the DAQ two cycles after it rises. The DAQ then
raises busy, which pulls `fts` low. Later triggers change nothing until the
reset: the latch is already set and busy blocks it. This matches the
observed behaviour, in which a second trigger inside the roughly 200 µs
dead time is lost. One consequence of the circuit as published: a trigger
that comes after the reset pulse but before busy drops sets the latch, and
it reaches the DAQ as soon as busy drops. `daq_reset` and `daq_busy` are
synchronised to the clock.

## Monitoring and configuration

Thirteen monitor points sit where the logic diagram has them: gamma M1,
SSD M1, SSD M2, the three shaped PPAC signals, the six synchronised types
and the trigger. Each has a 32-bit rising-edge counter. One point at a
time, chosen by register, is copied to `mon_out` for an oscilloscope. What
the monitor boxes did in the original firmware was not published. Counters
and a selectable output are this design's reading.

All settings live in `rtl/spi_cfg.sv`. The original system loaded the GDG
settings from a host program over SPI, but its register layout is
unpublished. Here the port is SPI mode 0 with 24-bit frames
`{write, addr[6:0], data[15:0]}`, MSB first, and SCLK at most clk/8:

| address | content |
|---|---|
| 0x00-0x1D | GDG channel: `[15:8]` width, `[7:0]` delay (cycles). 0-15 gamma crystals, 16 gamma M1, 17 SSD M1, 18 SSD M2, 19-21 PPAC1-3, 22 PPAC M2, 23-28 synchronisation of types 0-5, 29 Trigger |
| 0x20 | trigger-type enable mask, bits 5:0 (reset 0x1F) |
| 0x21 | monitor output select (reset 12 = trigger) |
| 0x22 | write 1 to bit 0: clear all scalers |
| 0x40 + 2i, 0x41 + 2i | scaler i, low and high 16 bits |

Reads return the register during the last 16 bits of the frame. A frame
that is not exactly 24 bits long writes nothing, and an assertion reports it.

## Files

| file | content |
|---|---|
| `rtl/trigger_pkg.sv` | clock period, GDG channel map, settings type, reset settings, trigger-type enum, monitor map |
| `rtl/sync2.sv` | two-flop synchroniser |
| `rtl/gdg.sv` | one GDG channel |
| `rtl/gamma_m1.sv` | per-crystal GDGs, OR, gamma M1 GDG |
| `rtl/ppac_m2.sv` | PPAC GDGs, fission coincidence, PPAC M2 GDG, PPAC M1 |
| `rtl/trigger_select.sv` | event-type coincidences, synchronisation GDGs, mask, trigger OR and GDG, ALL OR output |
| `rtl/monitor_bank.sv` | scalers and monitor output |
| `rtl/spi_cfg.sv` | SPI slave and register file |
| `rtl/daq_interrupt.sv` | busy/veto circuit |
| `rtl/cshine_trigger_top.sv` | the whole system |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/daq_model.sv` | behavioural DAQ with a fixed dead time (testbench only) |
| `tb/tb_beam_run.sv` | the top under a random beam-like event stream, with a DAQ of random dead time |

The full design is about 8,900 flip-flops, most of them in the 30 GDG delay
lines (254 each). A delay-line length of 32 would cover every published
setting, if space matters.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog if it hangs. With Verilator 5, from the top folder:

    verilator --binary --timing --assert -y rtl -y tb -Irtl \
        rtl/trigger_pkg.sv tb/tb_cshine_trigger_top.sv \
        --top-module tb_cshine_trigger_top -o sim
    ./obj_dir/sim

Replace the testbench name for a module test. `tb_cshine_trigger_top` runs
the top with all default parameters and reset settings, plus a DAQ with
200 µs dead time. It covers each event type, events that must not trigger,
a trigger during the dead time (vetoed), a mask change and a delay change
over SPI, scaler read-back and clear. It also checks every latency in the
table above to the nanosecond. It ends with a pulser test of one GDG, the
way the detector timing was calibrated: PPAC1 T is put on `mon_out` and its
delay set to 20 and then 40 ns. The monitor edge must come 75 and then
95 ns after the input edge. That is two synchroniser cycles, plus the
delay, plus one monitor register cycle.

`tb_beam_run` drives the same top with a random beam-like event stream. It
runs 1000 events at a one-body rate of 20 k/s, then 2000 at 40 k/s. About one
event in forty is of a triggering class, which gives a trigger rate of 0.5 to
1 k/s. The DAQ dead time is drawn between 80 and 200 µs for each event. For
every event the testbench predicts from the event class whether `trigger`
and `all_or` must fire. From its own record of the DAQ dead time it also
predicts whether `fts` must fire. At the end it compares the scalers and
prints the rates and the dead-time fraction. It takes about 5 s in
Verilator.

## How far it follows the original

Taken from the published design: the set of inputs and event types, the
gate structure of the logic diagram (including which PPAC M2 copy feeds
which gate), all published delays and widths, the 50 MHz clock and 20 ns
steps, the busy/veto circuit, and the 200 ns from PPAC M2 to the trigger.

This design's own choices: the synchronisers, the GDG's internal structure,
its latency convention and its non-retriggering, the 8-bit setting range,
the per-crystal gamma settings, the enable mask, the monitor function, the
SPI protocol and register map, and clocked logic in place of the NIM
busy/veto modules. The original GDG was a separate small FPGA next to the
user FPGA. Here every GDG channel is plain logic in the same design.

Not covered: the VME/USB interface FPGA and its local bus, the firmware
upload path, the I/O level-converter boards, the analog front end and the
DAQ itself. The top exposes the SPI port and the DAQ busy/reset levels where
these would connect.
