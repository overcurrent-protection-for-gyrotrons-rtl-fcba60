# Overcurrent protection for a high-power gyrotron

A gyrotron is a vacuum tube that makes megawatt-level millimetre waves, here for
electron-cyclotron heating of a tokamak plasma. If the tube breaks down inside, or
its electron beam is badly focused, the cathode and anode currents rise above their
normal values and an arc can destroy the tube. The only cure is to switch off the
high-voltage supplies quickly: within 10 µs, with at most 10 J of arc energy in the
electron gun.

This RTL describes the protection unit that watches those currents and requests the
shutdown. It has two independent systems working in parallel:

* a **fast system**: current transformers, comparators and a small FPGA. It trips
  in well under 100 ns;
* a **slow system**: current shunts, an isolating 4–20 mA converter, comparators and
  a 555 monostable timer. It trips in under 31 µs and measures the steady (DC)
  current, which a transformer cannot see.

Each system sends its protection request over optical fibres to four receivers: the
cathode power supply, the anode power supply, the interlock PLC and the central
control. The fibres are fail-safe. **Light means "all well". Darkness means
"protect".** A broken fibre or an unpowered transmitter therefore also shuts the
tube off.

Only the FPGA logic (`fast_prot_fpga` and what it contains) is synthesizable.
Everything around it is analog on the real boards: signal conditioning, comparators,
DACs, optocouplers, fibre transmitters, the isolating converter and the 555. Those
parts are written as behavioural models so that the whole chain can be simulated
end to end with real delays.

## Signal chains

### Fast system (`overcurrent_protection`, `fast_prot_fpga`)

```
CT ─ attenuator ─┬─ clamp ─ comparator ─ opto ─┐        ┌─ fibre tx ─► cathode PS
 (x4 channels)   │   ▲        ▲  ▲              │  FPGA  ├─ fibre tx ─► anode PS
                 │ self-test  │  └─ latch enable ◄─ opto ┤  (OR of   ├─ fibre tx ─► PLC
                 │  pulse     └── DAC ◄─ threshold code ┤  channels)└─ fibre tx ─► central
                 └────────────────── host serial link ◄─┘
```

There are four channels, one per current transformer. Channels 0 and 1 measure the
cathode current. They use a Pearson 110 transformer (0.1 V/A) behind a ×10
attenuator, so the comparator sees 10 mV per ampere. Channels 2 and 3 measure the
anode current. They use a Pearson 2100 (1 V/A) with no attenuator. Diodes clamp the
input. A comparator with a 7 ns response compares it with a threshold from a 12-bit,
5 V DAC. The comparator output goes through a 50 ns optocoupler into the FPGA.

**Timing of a trip.** Inside the FPGA, the path from a comparator input to the
protection outputs is *combinational*: an OR of all channels. No clock edge is in
the way. The response time is therefore the sum of the analog delays:

| stage | delay |
|---|---|
| comparator | 7 ns |
| input optocoupler | 50 ns |
| FPGA (combinational OR) | 0 |
| fibre transmitter | 10 ns (assumed) |
| **total** | **67 ns** (bound: 100 ns) |

The end-to-end testbench measures exactly 67 ns.

### Slow system (`overcurrent_protection`)

```
shunt ─ isolator 0-100 mV→4-20 mA ─ 250 Ω + clamp ─┬─ comparator (fixed threshold) ─ 555 ─┐
(x2: cathode 1 mΩ, anode 500 mΩ)                   └─ DAQ output              OR ─ 4 fibres
```

The isolator maps 0–100 mV to 4–20 mA. In the model this is linear, with a 30 µs
transport delay. The 250 Ω burden resistor turns the loop current into 1–5 V. That
voltage goes to the data-acquisition output (`daq_uv`) and to a comparator with a
200 ns response, against a fixed 4 V threshold. The threshold corresponds to 16 mA,
i.e. 75 mV on the shunt: 75 A of cathode current, or 150 mA of anode current.

When the threshold is exceeded, the comparator triggers a 555 monostable. The 555
holds its output high for τ = 1.1·Rt·Ct. With Ct = 100 µF and Rt from 2 kΩ to
102 kΩ, τ ranges from 0.22 s to 11.22 s. The default is 0.22 s. The two 555 outputs
are ORed onto the four slow fibres.

Response: 30 µs + 200 ns + 10 ns = 30.21 µs, below the 31 µs bound.

## The latch and why it needs a re-arm pause

This is the subtle part of the design. Any spike above the threshold must turn into
a protection request that lasts long enough for the power supplies to act. On the
real board, the FPGA does this by asserting the comparator's **latch-enable** pin:
while latched, the comparator keeps its output high even after the input falls.

`latch_ctrl` (one per channel) implements this:

* `trip = cmp_in | hold`. The comparator always reaches the output at once. `hold`
  is a register that keeps the trip up even if the comparator did not latch.
* `cmp_in` is synchronised by two flip-flops. If it is seen high and the latch time
  is not zero, `hold` and `cmp_le` go high for `latch_time` × 1 µs.
* Special latch-time values:
  * `latch_time = 0`: no latching; the output follows the comparator.
  * `latch_time = 0xFFFF`: hold until a reset.
* The front-panel button or the host `RESET` command ends any latch.

Releasing the latch needs care. The released latch-enable takes about 160 ns to
reach the comparator and come back: 50 ns optocoupler out, 7 ns comparator, 50 ns
optocoupler back, and two synchroniser clocks. During that time the FPGA still sees
the comparator's *latched* high output. If it re-armed at once, it would latch again
for ever. So, after every release (time-out or clear), the channel ignores its
comparator for `REARM` = 16 clocks (400 ns). After that pause, a current that is
still too high starts a new latch period. `trip` itself never drops while the
comparator is high.

Change `REARM` if you change the optocoupler or comparator delays. It must be longer
than the round trip.

## The FPGA (`fast_prot_fpga`)

Clock: 40 MHz (an assumption). Blocks:

| module | job |
|---|---|
| `latch_ctrl` ×4 | trip path, comparator latch enable, hold timer (above) |
| `host_if` (+`uart_rx`, `uart_tx`) | serial host link, register file (thresholds, latch time), command pulses, replies |
| `watchdog` | flags a host link silent for more than 1 s |
| `self_test` | injects a test voltage into each channel in turn and checks the comparator answers |
| `status_display` | trip-memory LEDs, watchdog LED, self-test failure LED, 1 Hz heartbeat |
| `sync2` | two-flip-flop synchroniser |

### Host link

The link is 115200 baud, 8N1. Every command is three bytes:
`{op[3:0], ch[3:0]}`, `data[15:8]`, `data[7:0]`. A gap of more than 1 ms between
bytes throws away a partial frame.

| op | name | effect |
|---|---|---|
| 1 | `SET_THR` | threshold DAC code of channel `ch` = `data[11:0]` (V = code·5 V/4096) |
| 2 | `SET_LATCH` | latch time = `data` µs (0 = follow, 0xFFFF = until reset) |
| 3 | `RESET` | release all latches, clear the trip memory |
| 4 | `SELFTEST` | test the channels set in `data[3:0]` |
| 5 | `READ_STAT` | reply: 16-bit status word, MSB first |
| 6 | `READ_THR` | reply: threshold code of channel `ch` |

Status word, from bit 15 down to bit 0:

| bits | field |
|---|---|
| 15 | `protect` |
| 14 | `wdt_expired` |
| 13 | `st_busy` |
| 12 | `st_done` |
| 11:8 | `st_pass` |
| 7:4 | `trip_mem` |
| 3:0 | `cmp_now` |

After reset, every threshold is 2048 (2.5 V) and the latch time is 0.

Every complete frame restarts the watchdog. By default an expiry only lights an LED
and sets a status bit. `TRIP_ON_EXPIRE = 1` makes it trip the protection instead.

### Self-test

For each selected channel, lowest first, `self_test` raises that channel's test
pulse. Through an optocoupler, the pulse adds 5 V at the conditioning input. The
channel passes if its comparator answers within 40 clocks (1 µs). The pulse lasts
80 clocks. The sequencer then waits for the comparator to fall before testing the
next channel.

The protection outputs are **not** masked during the test. The test exercises the
real trip path, so run it with the high voltage off.

## Parameters

| where | parameter | default | origin |
|---|---|---|---|
| top | `N_FAST`, `N_SLOW`, `N_OUT` | 4, 2, 4 | system description |
| top | `CATH_ATTEN`, `ANODE_ATTEN` | 10, 1 | system description |
| top | `FAST_CMP_NS`, `SLOW_CMP_NS`, `OPTO_NS` | 7, 200, 50 | system description |
| top | `ISO_NS` | 30000 | bound from the system description |
| top | `RT_OHM`, `CT_NF` | 2000, 100000 (τ = 0.22 s) | τ range given; Rt, Ct assumed |
| top | `SLOW_THR_UV` | 4 000 000 | assumed |
| top | `FIBER_NS` | 10 | assumed |
| top | `ST_INJECT_UV` | 5 000 000 | assumed |
| FPGA | `BIT_CLKS` | 347 (115200 baud at 40 MHz) | assumed |
| FPGA | `FRAME_GAP` | 40000 | assumed |
| FPGA | `LT_UNIT_CYC` | 40 | assumed |
| FPGA | `WDT_CYCLES` | 40 000 000 | assumed |
| FPGA | `ST_TIMEOUT`, `ST_PULSE` | 40, 80 | assumed |
| FPGA | `BLINK` | 20 000 000 | assumed |
| `latch_ctrl` | `REARM` | 16 | assumed |

Analog quantities are 32-bit signed integers:

* voltages in µV (`*_uv`);
* the loop current in nA (`iout_na`).

## Where this departs from, or adds to, the system description

What comes from the system description:

* the two parallel systems;
* the channel counts, sensors, attenuators and shunts;
* the comparator, optocoupler and isolator timings;
* an FPGA with latch, controllable latch time, reset, self-test, watchdog, status
  display and remotely set thresholds;
* the 555 with τ = 1.1·Rt·Ct over 0.22–11.22 s;
* four destinations per system;
* light = normal.

What this design adds:

* **Host link.** The description only says there is a "communication interface".
  The serial link, the frame format, the op codes and the reset values are this
  design's own.
* **Watchdog.** What the watchdog watches is not described. Here it watches the host
  link.
* **Self-test.** The self-test procedure and its injection voltage are this design's
  own.
* **Status display.** The set of LEDs is this design's own.
* **Trip path and latching.** The combinational trip path, the internal hold
  register beside the comparator latch, and the re-arm pause are design choices.
* **Combining the channels.** All channels are ORed onto every fibre. The
  description does not say how channels map to destinations.
* **Optocouplers.** The FPGA's protection output drives the fibre transmitter
  directly, not through an optocoupler. The description says all FPGA inputs and
  outputs are isolated. But a 50 ns optocoupler on both sides, plus the comparator,
  would exceed the 100 ns response that was measured, so only the inputs are
  isolated here. The static threshold codes and the reset button are also modelled
  without optocouplers.
* **Slow threshold.** The slow threshold is a fixed voltage. Remote setting is only
  described for the fast system.
* **Slow reset.** The front-panel reset also resets the 555s.
* **Burden voltage.** A 250 Ω burden turns 4–20 mA into 1–5 V; the description says
  "0–5 V". The resistor value is kept.
* **Which sensor is where.** The description names the transformer models both ways
  round. The assignment used (cathode: Pearson 110 with ×10; anode: Pearson 2100) is
  the one in its current-detection drawing and oscilloscope example. It changes
  only the volts-per-ampere figures above.
* **Component values.** All component values marked "assumed" in the parameter
  table are this design's.

Limits of the analog models:

* there is no comparator hysteresis;
* the isolator is a pure delay;
* no DAC settling time is modelled.

The current transformers, attenuators, shunts, DAQ instruments, power supplies, PLC
and host computer are not modelled. The testbenches apply the voltages the sensors
would produce and act as the host.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each prints
`TB_RESULT checks=N failures=M` and has a time-out.

`tb_overcurrent_protection` runs the complete unit with **all parameters at their
defaults**: 40 MHz, 115200 baud, 1 s watchdog, 0.22 s slow hold. It checks:

* fast trips on a cathode channel and an anode channel, and non-trips below the
  threshold;
* the 67 ns fast response;
* a threshold changed over the link moving the trip point;
* a timed latch, and a latch held until reset, released by the button and by the
  host command;
* the comparator held by its latch enable;
* a self-test through the analog chain, read back over the link;
* a watchdog expiry;
* the slow trip: 30.21 µs response, 0.22 s hold, no trip below the threshold, and
  the DAQ voltages.

It counts each of these mechanisms and fails if any never happened. It simulates
about 1.1 s and takes roughly a minute and a half of wall time.

`tb_fast_response` also runs the complete unit at its defaults. It repeats the
bench test of the fast board:

* with latching off, a 100 µs overcurrent pulse on each channel gives a 100 µs
  protection pulse, with both edges 67 ns late;
* for a threshold set over the link, stepping the current shows that the trip
  happens at the first current whose comparator voltage is above the threshold.
  The expected current is worked out from the transformer sensitivity, the
  attenuator and the DAC scale.

The unit testbenches shorten clocks-per-bit, latch units and timeouts through
parameters, so they run in seconds.

## Simulating

With Verilator 5. The package must come first:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/ocp_pkg.sv \
    $(ls rtl/*.sv | grep -v ocp_pkg) tb/tb_overcurrent_protection.sv \
    --top-module tb_overcurrent_protection
./obj_dir/Vtb_overcurrent_protection
```

Replace the testbench file and top name to run any other testbench. Note two
requirements:

* `--timing` is needed for the behavioural models' delays;
* every file uses `timescale 1ns/1ps`.

For FPGA synthesis, take `fast_prot_fpga` as the top. It and its submodules are
plain synthesizable SystemVerilog with asynchronous active-low resets.
