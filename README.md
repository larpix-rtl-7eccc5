# LArPix: a self-triggered 32-channel pixel readout chip, in SystemVerilog

A liquid-argon time projection chamber records where ionisation electrons
land on its anode and when. If the anode is a plane of small pads (3 mm
apart), every pad needs its own amplifier. A square metre then holds about
111,000 channels. They sit in the cold liquid, so the whole readout must stay
near 100 µW per channel. LArPix meets that budget with one observation: a pad
sees a real signal far less often than once a second. Each channel therefore
sits still, with only its amplifier and a comparator awake. It digitizes only
when the charge on its pad crosses a threshold. The digitized hits of many
chips then share one serial wire.

This repository gives the digital part of such a chip as synthesizable RTL.
The analog parts are behavioural models around it, so that the whole chip can
be simulated from pad charge to serial bit stream. The design follows the
description of the LArPix ASIC by Dwyer et al. ("LArPix: Demonstration of
low-power 3D pixelated charge readout for liquid argon time projection
chambers", JINST 2018, arXiv:1808.02969). That publication describes what the
chip does, not how its logic is built. Every internal detail below (encodings,
bit positions, handshakes, register map) is therefore this design's own
choice unless it is marked as following the publication. Section
"Departures and own choices" collects them all.

## The chip at a glance

```
 pad ──► CSA ──┬──► discriminator ──HIT──► channel control ──req/ack──► hit writer ──► FIFO ──┐
   ▲     ▲     │        ▲ (global + trim DAC)   │  STROBE, CONVERT      (chip ID,      2048 × 54  │
 pulser  RESET └──► SAR ADC ◄──────────────────┘  RESET                 channel,                 │
                   (8 bit)  ──────DATA[7:0]────►                        timestamp)              │
                                                  ×32 channels                                  ▼
 data_in ──► UART RX ──► daisy router ──(forward / config / read reply / FIFO)──► UART TX ──► data_out
                              │
                        config registers ──► thresholds, masks, pulser, monitor, periodic reset
```

Numbers that follow the publication: 32 channels; 8-bit SAR ADC; 11-clock
conversion-and-reset cycle; 24-bit timestamp counting system clocks; 54-bit
records holding a 2-bit type, 8-bit chip ID, 7-bit channel ID, 24-bit
timestamp, 8-bit ADC value, 2-bit FIFO flag and a parity bit; a 2048-record
FIFO; one serial bit per clock (5 Mb/s at the default 5 MHz clock); daisy
chains of up to 256 chips; amplifier gain 4 µV per electron, 0.55 V quiescent
output, saturation just under 1.8 V; 8-bit global threshold DAC over 0–1.8 V
plus a 5-bit per-channel trim of 1 mV steps; an optional 45 µV per electron
high-gain mode; ADC step 2 mV by default; test
pulser of about 1500 electrons per DAC count.

## One channel's life (`channel_ctrl`, `sar_logic`)

The channel's control is the part that defines the chip's timing. Each of the
32 channels has its own copy.

* **Idle.** The charge-sensitive amplifier (CSA) integrates whatever arrives
  on the pad. It has no continuous feedback, so the charge stays until it is
  reset. The comparator watches the output. Nothing is clocked in the
  digitizer.
* **Trigger.** The channel starts a digitization cycle when HIT is high and
  self-triggering is not masked for it. It also starts one when the external
  trigger pin is high and the channel is enabled for external triggers.
* **The 11-clock cycle.** The publication gives 11 clocks (2.2 µs at 5 MHz)
  for conversion plus reset. Here they are split as follows:

  | clocks | state | signals |
  |---|---|---|
  | 1 | SAMPLE | STROBE: the ADC holds the CSA output; the SAR register clears |
  | 8 | CONV | CONVERT: one ADC bit per clock, MSB first |
  | 2 | RESET | RESET: the CSA feedback switch closes |

* **Hand-over.** The channel then raises `req` with its 8-bit code and waits
  for `ack` from the hit writer. It cannot retrigger while it waits, but its
  CSA is live again, so charge arriving meanwhile is kept. If HIT is still
  high after the ack, the channel simply triggers again.
  A channel held above threshold therefore repeats every 13 clocks at best
  (one idle clock to see HIT, the 11-clock cycle, one clock of hand-over),
  about 385 kHz at 5 MHz. The publication quotes roughly 500 kHz for this
  case; the gap comes from the idle and hand-over clocks, which are this
  design's choice.
* **Periodic reset.** If periodic reset is enabled, an idle channel receives
  a 2-clock RESET at a programmable interval, with no digitization. This
  drains leakage charge that would otherwise creep up to the threshold. The
  publication reports that 3–10 kHz was enough.

The SAR logic (`sar_logic`) is the usual successive-approximation register.
In each CONV clock it proposes `trial` = (bits decided so far) with the next
bit set. The comparator answers combinationally whether the held voltage is at
least the DAC voltage for `trial`, and the bit is kept if it is.

## From conversion to record (`hit_writer`, `hit_fifo`, `timestamp_counter`)

The hit writer grants one waiting channel at most every `WRITE_CYC` = 3
clocks, in round-robin order. It writes that channel's record into the FIFO.
The timestamp in the record is the counter value **in the cycle of the FIFO
write**, not in the cycle of the trigger. The published chip behaves this
way: channels that trigger together (for example on the external trigger)
get timestamps 3 clocks apart. The authors note that sampling the timestamp at
the trigger would fix this. The RTL keeps the published behaviour on purpose.
Moving the timestamp capture into `channel_ctrl` is the change to make if you
want the fix.

When the FIFO is full, the writer stops granting and the channels wait, so no
record is lost. The 2-bit FIFO flag in each record is
{FIFO became full with this write, FIFO at least half full}.

### Record layout (`larpix_pkg`)

Bit 0 is the first bit on the wire.

| bits | hit record (type 0) | configuration record (types 2, 3) |
|---|---|---|
| 1:0 | type: 0 data, 1 test, 2 config write, 3 config read | type |
| 9:2 | chip ID | chip ID |
| 16:10 | channel ID | register address (17:10) |
| 40:17 | timestamp | register data (25:18), rest 0 |
| 50:41 | data field; the ADC value is in 48:41 | 0 |
| 52:51 | FIFO flags | 0 |
| 53 | odd parity over all 54 bits | odd parity |

The publication lists the fields and their widths, but they add up to 52
bits. Here the ADC value sits in a 10-bit data field to fill the 54. The field
order, the type codes and the parity sense are this design's choices.

## The serial line and the daisy chain (`uart_tx`, `uart_rx`, `daisy_router`)

All chips and the controller share the system clock, so the serial lines run
at exactly one bit per clock and need no oversampling. A frame is a start bit
(0), the 54 record bits LSB first, and a stop bit (1). That is 56 clocks per
record, or about 89,000 records per second at 5 MHz. The line idles high.

Chips are chained output-to-input. The controller drives the first chip's
input and listens to the last chip's output. Each chip's router looks at
every record it receives:

* A configuration write or read carrying this chip's ID and good parity is
  executed and not passed on. A read makes a reply record: type 3, this
  chip's ID, the address and the register value. The reply travels down the
  chain.
* Everything else is forwarded unchanged. That covers data records of
  upstream chips, configuration for other chips and other chips' read
  replies. A bad-parity record addressed to this chip is dropped.

The output serves forwarded records first, then a pending read reply, then
the local FIFO. Input and output run at the same bit rate, so a 2-entry
forward queue can never overflow (an assertion checks it). The flip side is
that a chip whose upstream neighbours send without pause cannot empty its own
FIFO until they stop. The chip's own FIFO absorbs this.

### Configuration registers (`config_regs`)

Fifty-one 8-bit registers; the address map is this design's own:

| address | content |
|---|---|
| 0–31 | 5-bit threshold trim of channel 0–31 |
| 32 | global threshold DAC |
| 33 | test pulser DAC; writing it fires a pulse in the next clock |
| 34–37 | self-trigger mask, one bit per channel, 1 = inhibited |
| 38–41 | external-trigger enable, one bit per channel |
| 42–45 | test-pulse enable, one bit per channel |
| 46 | analog monitor: bit 7 enable, bits 4:0 channel |
| 47 | bit 0: periodic reset enable |
| 48, 49 | periodic reset interval in clocks (low, high byte); resets to 1000 |
| 50 | bit 0: amplifier high-gain mode (45 µV per electron) |

After reset, all channels self-trigger and the global threshold is 0. The
publication reports that the real chip also woke up in this state: it
immediately fills its FIFO with pedestal records until the thresholds are
programmed. The end-to-end testbench uses this start-up flood to exercise the
full FIFO.

## Analog parts as models

These files model analog circuits. They are meant for simulation only: they
use `int` values in microvolts and electrons and update once per clock.

| file | models | behaviour |
|---|---|---|
| `csa_model` | charge-sensitive amplifier | vout = 0.55 V + 4 µV × stored electrons (45 µV in high-gain mode), clipped at 1.8 V; RESET clears |
| `threshold_dac_model` | global 8-bit DAC + 5-bit trim | vthr = code × 1.8 V / 255 + trim × 1 mV |
| `discriminator_model` | comparator | HIT = vout > vthr; no hysteresis (no value is given) |
| `sar_adc_model` | sample-and-hold, capacitor DAC, comparator | comp = held ≥ 0.4 V + trial × 2 mV |
| `pulser_model` | test charge injector | code × 1500 electrons in one clock |
| `analog_monitor_model` | line-out switch | selected channel's vout, or 0 |

With these defaults, a hit of N electrons reads as
code = (550,000 + 4N − 400,000) / 2000 µV, clipped to 0–255. The pedestal
reads 75, and 60,000 electrons read 195. The ADC step and offset come from
external references on the real chip, so they are parameters here. The
400 mV offset is this design's choice.

## Departures and own choices

Conflicts inside the publication, and how they are resolved here:

* **Dead time.** The publication says the CSA is reset after conversion and
  gives 11 clocks for conversion plus reset. It also speaks of a dead time of
  three clocks, from sampling to the end of the reset. Both cannot hold with
  one sample-convert-reset sequence. The RTL follows the 11-clock
  sample → convert → reset order and ignores triggers during the whole cycle.
* **ADC step.** The publication's specification table gives a 2 mV default,
  while the text quotes 1 mV for its measurements. The default here is 2 mV.

Not given by the publication and chosen here: the record bit order, the type
codes and the parity sense; the configuration record format and register
map; the UART frame; the 1 + 8 + 2 split of the 11-clock cycle; the
round-robin arbiter; the meaning of the two FIFO flags; back-pressure instead
of record loss when the FIFO is full; the router's output priority;
dropping bad-parity records; the chip ID coming from pins; a synchronous
active-low reset that also holds every CSA in reset; and the test pulse
firing on a write of the pulser register.

Not modelled: leakage current; noise; the 45 ns CSA rise time and the 30 ns
discriminator latency, both shorter than a clock; the fixed ADC bits of the first silicon; pads, ESD and bias circuits.

## How far it is verified

Every module has a self-checking testbench in `tb/`. Each one compares the
module with values computed independently inside the testbench. Each one was
also shown to fail on a deliberately broken copy of its module.

| testbench | checks |
|---|---|
| `tb_channel_ctrl` | the exact S C×8 R R sequence; ADC code; waiting for ack; masks; external trigger; periodic reset |
| `tb_sar_logic` | 300 conversions against an ideal comparator, 8 clocks each |
| `tb_hit_writer` | 32 simultaneous requests: round-robin order, 3-clock spacing, timestamps, fields, parity, hold on full |
| `tb_hit_fifo` | random traffic against a queue; fill to 2048; flags |
| `tb_daisy_router` | execute, forward, reply, parity drop, output priority |
| `tb_uart_tx`, `tb_uart_rx` | frames, back-to-back timing, bad stop bit |
| `tb_config_regs` | every register against a shadow copy; decoded fields; pulse strobe |
| `tb_larpix_chip` | the whole chip at full size, driven through its pins (see below) |
| `tb_larpix_chain` | 28 chips (896 channels) on one chain: configuration, read-back and hits of every chip reach the end |
| others | the package layout and parity, and each analog model |

`tb_larpix_chip` runs in this order:

1. Power up and let the start-up flood fill the FIFO.
2. Raise the threshold and read it back.
3. Drain all 2048+ records.
4. Put a hit on one pad and check its code and timestamp.
5. Show that a masked channel gives no record.
6. Show sub-threshold charge on the monitor, then drained by the periodic
   reset.
7. Fire the test pulser.
8. Fire the external trigger on four channels: pedestal records 3 clocks
   apart. Then read a small charge in high-gain mode.
9. Pass a data record and another chip's configuration through unchanged.

It counts each of these mechanisms and fails if any never happened.

The serial protocol, register map and record encodings here are not those of
the fabricated chip or its software. Data from real LArPix hardware cannot be
decoded with this RTL.

## Simulating

Every testbench is a top-level module with no ports. Any of them builds with
plain Verilator 5. The package goes first, and the `-y` paths let Verilator
find the other modules by file name:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_larpix_chip \
    -y rtl -y tb +libext+.sv -Irtl rtl/larpix_pkg.sv tb/tb_larpix_chip.sv
./obj_dir/Vtb_larpix_chip
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. The chip
testbench takes a few seconds. The 28-chip chain takes under a minute; change
`NCHIP` in `tb_larpix_chain.sv` for other board sizes. The chip's parameters
are `FIFO_DEPTH` (2048) and `WRITE_CYC` (3). The analog constants are
parameters of the model modules.
