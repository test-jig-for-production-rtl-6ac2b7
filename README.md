# RPC-DAQ Test-Jig firmware

The ICAL neutrino detector planned by the India-based Neutrino Observatory uses
28,800 Resistive Plate Chambers. Each chamber has its own FPGA data-acquisition
board, the RPC-DAQ. The RPC-DAQ takes 128 strip signals from the front end,
latches them on a global trigger, counts pulses per strip for health
monitoring, makes fold (pre-trigger) signals and sends its data over Ethernet.
Testing that many boards needs an instrument that pretends to be both the
detector and the trigger system. That instrument is the Test-Jig: a second FPGA
board wired to the 128 strip inputs and the global-services connector of one
RPC-DAQ.

The test loop is closed on the host, not in the jig:

1. The host test application chooses a test and sends the jig one UDP command.
2. The jig plays the requested stimulus onto the strips and the trigger line.
3. The RPC-DAQ reports what it saw straight to the host.
4. The host compares the report with the stimulus it asked for.

So the jig firmware does not check the RPC-DAQ. It must produce exactly the
stimulus the command describes, with cycle-exact timing between hits and
triggers. This repository holds that firmware as synthesizable SystemVerilog,
plus testbenches that check it, including an end-to-end test against a
behavioural RPC-DAQ.

The published description of the jig gives:

- the three primary tests;
- the field order of their command packets;
- the signals of the global-services link;
- the board-level parts.

It gives no field widths, codes, checksum rule or timing details. Every such
detail here is a choice of this implementation; the section *Departures and
open points* lists them.

## The three tests

All times are counted in cycles of the 50 MHz system clock (20 ns).

### Event test: a stored event played X times

Command fields: X (events), Z0..Z127 (hit pattern), U (event period), W (hit
width) and T (hit-to-trigger delay).

```
strips   ____/ Z \______________________/ Z \________ ...   (Z for W cycles)
trigger  ____________/‾‾‾‾\______________________/‾‾‾‾\__    (TRIG_W = 5 cycles)
             |<- T ->|                  |
             |<---------- U ----------->|
```

- Each event drives pattern Z on the strips for W cycles.
- The trigger rises exactly T cycles after the hits' leading edge. T may be
  longer than W: the RPC-DAQ stretches its inputs, so the hits need not be
  present when the trigger arrives.
- A new event starts every U cycles. The host converts its trigger rate into U.
  If U is too short to hold one event, it is lengthened to
  `max(W, T+TRIG_W) + 1`.
- After X events the test ends. X = 0 ends the test at once.

### Monitoring test: counted pulses

Command fields: Y (width), Z (strip mask) and W (pulse count).

- The jig sends W pulses, each Y cycles wide, on every strip whose bit in Z is
  set.
- There is a gap of Y cycles after each pulse, so the period is 2Y.
- No trigger is sent.
- The host then expects the RPC-DAQ's rate counters to show exactly W on the
  selected strips and 0 elsewhere.
- Y = 0 is treated as 1.

### Cross talk test: one channel at a time

Command fields: X (hits per channel), D (delay) and W (width).

- On channel 0 the jig sends X hits, each W cycles wide, with a trigger D
  cycles after each hit.
- It then does the same on channel 1, and so on up to channel 127.
- Each hit occupies one hit period, `HIT_PERIOD` (default 50,000 cycles = 1 ms).
  The period is lengthened if D or W need more time.
- Any strip other than the driven one that appears in the RPC-DAQ's event is
  cross talk.

Only one test runs at a time. A command that arrives while a test runs is
refused.

## Command packets

Every command is one UDP payload. All multi-byte fields are big-endian.

| offset | Event (37 bytes) | Monitoring (29 bytes) | Cross talk (15 bytes) |
|---|---|---|---|
| 0-1 | Header `AA 55` | Header | Header |
| 2-3 | Size = 37 | Size = 29 | Size = 15 |
| 4 | Command ID `01` | Command ID `02` | Command ID `03` |
| 5.. | X (4 bytes) | Y (2) | X (2) |
| | Z127..Z0 (16 bytes, Z127 first) | Z127..Z0 (16) | D (2) |
| | U (4) | W (2) | W (2) |
| | W (2) | R_Ack (1) | R_Ack (1) |
| | T (2) | Checksum (1) | Checksum (1) |
| | R_Ack (1) | Trailer `55 AA` | Trailer |
| | Checksum (1) | | |
| | Trailer `55 AA` | | |

- Size is the total packet length in bytes.
- Checksum is the 8-bit sum of every byte before it.
- A non-zero R_Ack asks for an acknowledgement.

The acknowledgement uses the same framing:

```
AA 55 | 00 09 | Command ID | Status | Checksum | 55 AA
```

| Status | When | Answered |
|---|---|---|
| `00` accepted | idle jig, good packet | only if R_Ack |
| `01` busy | a test is still running; nothing is started | only if R_Ack |
| `02` bad checksum | header, trailer or checksum wrong | always |
| `03` unknown command | unknown ID, or Size wrong for that ID | always |

The parser hunts for `AA 55`, reads Size and stores the packet. It drops a Size
outside 9..37 and hunts again, so the stream resynchronises after garbage.

## Global services link

| signal | direction | what the firmware does |
|---|---|---|
| `gclk_out` | to RPC-DAQ | 10 MHz = clock / 5, high for 2 of the 5 cycles |
| `pps_out` | to RPC-DAQ | high for `PPS_WIDTH` (50) cycles = 1 µs once per `CLK_HZ` cycles; its rising edge always falls on a 10 MHz rising edge |
| `trig_out` | to RPC-DAQ | the trigger from the Event or Cross talk generator |
| `fold_in[7:0]` | from RPC-DAQ | 1-, 2-, 3- and 4-fold for X (bits 0-3) and Y (bits 4-7) |

The fold inputs are synchronised with two flip-flops (`fold_level`). Their
rising edges are counted in eight 32-bit counters (`fold_cnt`), which are
cleared whenever a test is accepted.

## Structure

```
rx bytes -> cmd_parser -> tj_controller -+-> event_gen --+
                               |         +-> mon_gen ----+-> OR -> output reg -> strip_out[127:0]
                               |         +-> xtalk_gen --+
                               |                 trigger -> global_services -> trig_out, gclk_out, pps_out
                               |                           fold_in -> global_services -> fold_cnt, fold_level
                               +-> resp_gen -> tx bytes
```

| file | content |
|---|---|
| `rtl/tj_pkg.sv` | constants, command IDs, status codes, command structs |
| `rtl/cmd_parser.sv` | byte stream to command, checksum/trailer/ID checks |
| `rtl/tj_controller.sv` | accept/refuse, start the generator, acknowledgement request, output merge |
| `rtl/event_gen.sv`, `rtl/mon_gen.sv`, `rtl/xtalk_gen.sv` | the three stimulus generators |
| `rtl/global_services.sv` | 10 MHz, PPS, trigger pin, fold readback |
| `rtl/resp_gen.sv` | acknowledgement packet |
| `rtl/testjig_top.sv` | top: the above, reset synchroniser, strip output register |

The board's Ethernet controller (with its TCP/IP stack) and the soft processor
are not part of this RTL. The processor moves the UDP payload between the
controller and the firmware. The firmware's boundary is therefore two byte
streams:

- `rx_valid`/`rx_data` carry the command payload, one byte per cycle.
- `tx_valid`/`tx_data`/`tx_ready` carry the acknowledgement, with
  back-pressure.

Also outside the RTL: the configuration flash, the oscillators, the power-on
reset, the LVDS and TTL-to-LVDS buffers, the LEDs and the spare and sensor
connectors. On the board, 120 strips leave the FPGA as LVDS and 8 leave as TTL
through external converters. In this RTL all 128 are the same logic signal.

## Timing

- A generator's outputs are registered, and the merged strips pass one more
  register in the top. The trigger passes the same depth (one register in
  `global_services`). At the pins, the trigger therefore rises exactly T (or D)
  cycles after the hits' leading edge.
- Command to stimulus:
  - `pkt_valid` comes 2 cycles after the packet's last byte.
  - The generator's start pulse comes 1 cycle later.
  - The first strip pattern reaches the pins two clock edges after the edge
    that samples the start pulse.
- A run lasts exactly X·P (Event), 2·Y·W (Monitoring) or 128·X·P (Cross talk)
  cycles, where P is the event or hit period. `test_done` pulses at the end.
- An acknowledgement leaves in 9 cycles when `tx_ready` stays high.
- Reset `rst_n` is active low, asserted asynchronously and released
  synchronously inside the top.

## Departures and open points

- **Time resolution.** The board has 50 MHz and 96 MHz oscillators. This design
  runs everything from 50 MHz, because 50 MHz divides exactly to the 10 MHz
  global clock. Widths and delays therefore come in 20 ns steps. The host's
  Event test panel offers signal widths of 2, 5 and 10 ns, which this firmware
  cannot produce; 20 ns and longer work, and 50 ns becomes 40 or 60 ns. The
  Monitoring panel's 20-100 ns widths and the 200 ns-1.5 µs delays are exact.
- **Hit width in the Event test.** The published text calls the width "hard
  coded", but the Event packet carries a W field and the host panel has a
  width slider. Here W is a command field.
- **Not built:**
  - the "RAND" settings of the host panels (their meaning is not described; random
    hit patterns are made by the host);
  - a stop command (the host panel has a stop button, but no command for it is
    described);
  - a path that reports fold counts to the host (the counters are ports);
  - the calibration and spare lines of the global-services connector;
  - storing test patterns in the flash.
- **This design's own choices:** all field widths, codes and the checksum rule;
  the 5-cycle trigger pulse; the Monitoring gap; the Cross talk hit period; the
  PPS width; the refusal rules and the acknowledgement format.

Sizes against the host's settings:

| setting | built | fits |
|---|---|---|
| up to 3 million events | 32-bit X | yes |
| 10 Hz event rate = 5,000,000 cycles | 32-bit U | yes |
| delays up to 1.5 µs = 75 cycles | 16 bits | yes |
| Monitoring counts up to 250 | 16 bits | yes |

## Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it covers |
|---|---|
| `tb_cmd_parser` | random packets of all three kinds, byte gaps, garbage before the header, bad checksum and trailer, unknown ID, wrong Size, resynchronisation, 2-cycle latency |
| `tb_event_gen`, `tb_mon_gen`, `tb_xtalk_gen` | cycle-by-cycle comparison with a reference schedule, run lengths, per-strip pulse counts, one-hot channel order |
| `tb_global_services` | 10 MHz period and duty, PPS period and width and alignment (second shortened to 1000 cycles), trigger delay, fold counts and clear |
| `tb_resp_gen` | reply bytes under random back-pressure, 9-cycle unstalled length |
| `tb_tj_controller` | accept, busy, bad-checksum and unknown-command cases, R_Ack, held response, output merge |
| `tb_testjig_top` | end to end, second shortened to 2000 cycles and hit period 40 cycles (see below) |
| `tb_testjig_full` | the same at the default parameters: 3 events at 500 Hz, 50 pulses of 20 ns, a full 128-channel cross talk run and one whole simulated second of PPS (about a minute of simulation) |
| `tb_host_settings` | the host panels' settings at the default parameters: every event-rate and delay position, and every monitoring width and count position |

The end-to-end test sends real command bytes and reads the acknowledgements.
The `rpc_daq_model` testbench module plays the RPC-DAQ: it latches the
stretched hits on each trigger, counts pulses per strip, makes simple fold
signals and counts the 10 MHz and PPS edges. The test checks:

- every latched event and its hit-to-trigger delay;
- the monitoring counts;
- the cross-talk channel order;
- the fold counters;
- the refusals.

It also counts how often each of these mechanisms fired: Event, Monitoring and
Cross talk runs, busy, bad-checksum and unknown-command refusals, a silent
(unacknowledged) command, PPS and fold counting. A mechanism that never fired
counts as a failure.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tj_pkg.sv tb/tb_pkt_pkg.sv tb/tb_testjig_top.sv --top-module tb_testjig_top
./obj_dir/Vtb_testjig_top
```

Replace the last file and the top name for any other testbench.
`tb/tb_pkt_pkg.sv` builds command packets from the byte layout above. It does
not use the design's constants, so a wrong constant in the RTL shows up as a
failure.

## Changing it

| parameter of `testjig_top` | default | meaning |
|---|---|---|
| `CLK_HZ` | 50,000,000 | system clock; sets the PPS period |
| `GCLK_HZ` | 10,000,000 | global clock; `CLK_HZ/GCLK_HZ` must be an integer |
| `PPS_WIDTH` | 50 | PPS pulse length, cycles |
| `TRIG_W` | 5 | trigger pulse length, cycles |
| `XT_HIT_PERIOD` | 50,000 | Cross talk hit period, cycles |

Packet layouts are defined in one place, `cmd_parser`'s field offsets and
`tj_pkg`'s lengths. A new test needs four changes:

- a command ID and a struct in `tj_pkg`;
- a decode arm in `cmd_parser`;
- a mode in `tj_controller`;
- a generator whose outputs are low when idle, ORed into the strip merge.
