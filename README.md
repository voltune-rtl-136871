# VolTune control path in SystemVerilog

FPGA boards feed their core, memory and transceiver supplies from digitally
programmable regulators. A regulator that speaks PMBus can be told at run time
to move a rail to a new voltage. VolTune makes that ability available to logic
inside the FPGA. A design asks for "set lane 6 to 0.85 V" or "read lane 6". A
small controller in the fabric turns the request into PMBus traffic and
returns the result. No processor is involved.

This repository holds RTL for the hardware control path of VolTune, as built
for a Kintex-7 KC705 board with a TI UCD9248 multi-rail regulator. It also
holds the measurement harness used to characterise voltage transitions, and
testbenches that check each block and the whole path against a behavioural
regulator model.

## 1. Structure

```
 AXI4-Lite  ┌───────────────────────┐  vt_cmd_t  ┌───────────────┐ pmbus_req_t ┌────────────────────┐ SCL/SDA
 ──────────►│ voltage_test_manager  │───────────►│ power_manager │────────────►│ axis_pmbus_wrapper │◄──────► regulator
 (host)     │  sequence, buffer     │◄───────────│ opcode→PMBus  │◄────────────│ bit engine         │ (open drain)
            └──────────▲────────────┘  vt_ack_t  │ ┌───────────┐ │ pmbus_rsp_t └────────────────────┘
                       │ time stamps             │ │lane map   │ │
            ┌──────────┴────────────┐            │ │LINEAR codec│ │
            │ axis_counter          │            │ └───────────┘ │
            └───────────────────────┘            └───────────────┘
```

Everything runs in one 100 MHz clock domain. The four units talk over
valid/ready streams.

| Module | Role |
|---|---|
| `voltune_top` | Wires the four units together. Brings out the register port, the PMBus pins and status. |
| `voltage_test_manager` | The requester. It runs the scripted measurement sequence or one direct command, and stores time-stamped voltage samples. The host reads them over AXI4-Lite. |
| `axis_counter` | Free-running 32-bit cycle counter: the time base for the time stamps. |
| `power_manager` | Expands one VolTune opcode into an ordered list of PMBus transactions and issues them one at a time. |
| `kc705_lane_map` | Lane number → (device address, PAGE). |
| `pmbus_linear_codec` | Millivolts ↔ LINEAR16, and LINEAR11 → milli-units. |
| `axis_pmbus_wrapper` | PMBus/I²C master. Runs one transaction per request and returns status and read data. |
| `voltune_pkg` | Opcodes, PMBus command codes, and the stream beat structs. |

The design stops short of the following. Each is replaced by a port or by a
testbench model:

- The JTAG-to-AXI bridge: its AXI4-Lite side is the top's `s_axi_*` port.
- The pad buffers and pull-ups: the top has drive-low enables and line inputs.
- The regulator itself: `tb/ucd9248_model.sv`.

## 2. The command interface

A request is one 32-bit beat, `vt_cmd_t`:

| bits | field | meaning |
|---|---|---|
| 31:28 | opcode | see below |
| 27:24 | lane | rail number, 0..10 on KC705 |
| 23:16 | reserved | |
| 15:0 | value | millivolts for the Set opcodes |

Every request is answered with exactly one 48-bit beat, `vt_ack_t`:

| bits | field |
|---|---|
| 47:44 | `status`: 0 = OK, 1 = PMBus NACK, 2 = bad lane, 3 = bad opcode |
| 43:40 | opcode, echoed |
| 39:36 | lane, echoed |
| 35:32 | reserved |
| 31:16 | raw PMBus word: written (Set) or read (Get) |
| 15:0 | value: mV, or mA for Get Current |

| opcode | operation | PMBus transactions after an optional PAGE |
|---|---|---|
| 0x0 | Clear Status | none |
| 0x1 | Set Under Voltage | Write Word `VOUT_UV_WARN_LIMIT` (43h), then Write Word `VOUT_UV_FAULT_LIMIT` (44h) |
| 0x2 | Set Power Good On | Write Word `POWER_GOOD_ON` (5Eh) |
| 0x3 | Set Power Good Off | Write Word `POWER_GOOD_OFF` (5Fh) |
| 0x4 | Set Voltage | Write Word `VOUT_COMMAND` (21h) |
| 0x5 | Get Voltage | Read Word `READ_VOUT` (8Bh) |
| 0x6 | Get Current | Read Word `READ_IOUT` (8Ch) |

Clear Status is handled inside the controller. It forgets which rail is
selected and clears the sticky error flags. It does not send `CLEAR_FAULTS`.

## 3. From opcode to bus traffic (`power_manager`)

Here is what happens to one request:

1. **Decode.** The lane is looked up in the rail map.

   | lanes | device address | PAGE |
   |---|---|---|
   | 0–3 (VCCINT, VCCAUX, VCC3V3, VADF) | 52 | 0–3 |
   | 4–7 (VCC2V5, VCC1V5, MGTAVCC, MGTAVTT) | 53 | 0–3 |
   | 8–10 (ACCAUX_IO, VCCBRAM, MGTVCCAUX) | 54 | 0–2 |

   Lanes 11–15 and opcodes above 6 are rejected at once, with no bus
   traffic. The matching sticky flag is set.
2. **PAGE caching.** One device serves up to four rails, and `PAGE` selects
   among them. The controller remembers the last lane it selected. It writes
   `PAGE` (Write Byte 00h) only when the new lane differs from that one, or
   when no lane is known to be selected. No lane is known after reset, after
   Clear Status, or after any failed transaction.

   So a run of readbacks on one rail costs one Read Word each. A request for
   another rail pays one extra Write Byte.
3. **Serial execution.** The transactions of the opcode go to the PMBus
   engine one at a time. The next request is raised only after the previous
   response has been taken. An assertion checks this. A NACK in any step
   abandons the rest of the list and returns status 1.
4. **Acknowledge.** Set opcodes return the encoded word they wrote. Get
   Voltage returns the word read and its value in millivolts. Get Current
   returns the LINEAR11 word and its value in milliamps.

Example: setting VCCBRAM (lane 9) to 0.9 V from a fresh state gives these
transactions:

```
[54] PAGE 00h ← 01h          Write Byte
[54] VOUT_COMMAND 21h ← 0E66h  Write Word (0.9 × 4096 = 3686.4 → 3686)
```

Controller overhead is 2 cycles from command to the first PMBus request, and
1 cycle between transactions. Everything else is bus time.

## 4. Number formats (`pmbus_linear_codec`)

**LINEAR16 (voltages).** A voltage is `mantissa × 2^VOUT_EXP`, where the
exponent comes from the regulator's `VOUT_MODE`. The default here is
`VOUT_EXP = −12`: one LSB is 0.244 mV, so 1.000 V is 0x1000.

- Encoding computes `round(mV × 2^12 / 1000)` as a multiply by a fixed-point
  reciprocal. No divider is needed. The result saturates at 0xFFFF.
- Decoding computes `round(word × 1000 / 2^12)`.
- Both round to nearest. The testbench checks every millivolt value up to
  6 V and 3000 random words against real-number arithmetic.

A board with another `VOUT_MODE` only needs a different `VOUT_EXP`.

**LINEAR11 (telemetry).** The word has a 5-bit signed exponent and an 11-bit
signed mantissa. It is decoded to a signed value × 1000, saturated to 16 bits.
For `READ_IOUT` this is milliamps, up to 32.767 A.

## 5. PMBus engine (`axis_pmbus_wrapper`)

**Protocol.** It is an I²C master with SMBus framing, and it implements five
primitives:

- Send Byte
- Write Byte
- Write Word (low byte first)
- Read Byte
- Read Word (repeated START, then ACK after the first data byte and NACK after
  the last)

Each transaction starts with START and the 7-bit address with W. It ends with
STOP, including after a NACK:

- An address NACK returns status `ADDR_NACK`.
- A NACK of a command or data byte returns `DATA_NACK`.

**Bit timing.** Every SCL period has four quarters of
`QDIV = CLK_HZ / (4 × SCL_HZ)` cycles:

- SDA changes in the first quarter.
- SCL rises at the second quarter.
- SDA is sampled at the third quarter.
- SCL falls at the fourth quarter.

At 100 MHz, `QDIV` is 62 at 400 kHz (a true 403 kHz) and 250 at 100 kHz. The
inputs pass through two-flop synchronisers.

**Clock stretching.** If a slave holds SCL low, the engine waits before it
goes on.

**Latency.** Transaction lengths are whole bit times. Each bit time is
4 × `QDIV` cycles.

| transaction | bit times | cycles at 400 kHz | at 100 kHz |
|---|---|---|---|
| Write Byte (PAGE) | 29 | 7 192 | 29 000 |
| Write Word | 38 | 9 424 | 38 000 |
| Read Word | 48 | 11 904 | 48 000 |

The outputs are "drive low" enables for open-drain pads. Tie each enable to
the output-enable of a buffer whose output is 0, and feed the pad back to
`scl_i` and `sda_i`.

## 6. Measurement harness (`voltage_test_manager`)

The harness reproduces the voltage-transition experiment. A host writes
thresholds, the initial and target voltage, and the rail, then sets RUN. The
unit then issues this fixed sequence:

1. Clear Status
2. Set Under Voltage
3. Set Power Good On
4. Set Power Good Off
5. Set Voltage (initial)
6. Wait `WAIT_CYCLES` (default 10 000 = 0.1 ms)
7. Get Voltage, kept in `INIT_READBACK`
8. Set Voltage (target): **t = 0**
9. Get Voltage, repeated `NUM_SAMPLES` times

`t = 0` is the cycle at which the target command is accepted by the
PowerManager. For every sample the buffer keeps three things:

- the raw word
- the millivolt value
- the time stamp: the counter value when the sample's acknowledge arrives,
  minus t = 0

`T_ACK` records how long the target command itself took.

If SAMPLE_CURRENT is set in the same write as RUN, step 9 issues Get Current
instead of Get Voltage. The buffer then holds a periodic trace of the rail
current in mA, which is the telemetry form of the same loop.

A non-OK acknowledge stops the run with the error bit set. The host polls
`STATUS` and reads the buffer one entry at a time through `BUF_INDEX`.

A write to `DIRECT_CMD` while idle sends one arbitrary command. Its
acknowledge appears in `DIRECT_ACK_LO` and `DIRECT_ACK_HI`. This is how a
voltage sweep is driven: one Set Voltage per step.

| addr | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0: RUN; bit 1: SAMPLE_CURRENT (the loop reads current) |
| 0x04 | STATUS | R | [31:16] samples stored, [15:12] last opcode, [11:8] last status, [2] error, [1] done, [0] busy |
| 0x08 | LANE | RW | rail for the sequence (reset 6, MGTAVCC) |
| 0x0C | UV_MV | RW | under-voltage limit, mV |
| 0x10 | PG_ON_MV | RW | power-good-on, mV |
| 0x14 | PG_OFF_MV | RW | power-good-off, mV |
| 0x18 | INIT_MV | RW | initial voltage, mV (reset 1000) |
| 0x1C | TARGET_MV | RW | target voltage, mV (reset 1000) |
| 0x20 | WAIT_CYCLES | RW | delay after the initial setting |
| 0x24 | INIT_READBACK | R | {raw, mV} of the readback before the step |
| 0x28 | BUF_INDEX | RW | buffer entry to read |
| 0x2C | BUF_VOLT | R | {raw, mV} of that entry |
| 0x30 | BUF_TIME | R | its time stamp, cycles since t = 0 |
| 0x34 | DIRECT_CMD | RW | `vt_cmd_t`; writing it while idle issues it |
| 0x38 | DIRECT_ACK_LO | R | {raw, value} |
| 0x3C | DIRECT_ACK_HI | R | {status, opcode, lane, reserved} in [15:0] |
| 0x40 | NUM_SAMPLES | RW | clipped to 1..DEPTH |
| 0x44 | T_ACK | R | cycles from target issue to its acknowledge |
| 0x48 | DEPTH | R | buffer size |

Settling time is worked out on the host from the buffer, in four steps:

1. Take the stable value as the mean of the last N samples.
2. Call a sample stable if it lies within ±x % of that value.
3. Find the first index that starts N stable samples in a row.
4. The settling time is that sample's time stamp.

The top-level testbench contains a reference implementation.

## 7. Sampling rate and transition time

One sample of the hardware path is a single Read Word. PAGE is not re-sent,
because the lane does not change. At 400 kHz this gives one sample every
11 904 + ~10 cycles = **0.119 ms**, and at 100 kHz one every **0.48 ms**.

The original prototype reported intervals of about 0.2 ms and 0.6 ms. Those
figures include host-side overheads that this RTL does not model, so the RTL
samples somewhat faster than the prototype.

How long a transition takes depends on the regulator's slew rate, not on this
logic. The regulator model in the testbenches slews 1 LSB (0.244 mV) per µs.
With it, the characterisation sweeps give the settling times below, using the
method of section 6 with N = 5 and x = 1 %. Times are measured from the moment
the target command is accepted.

| step | 400 kHz | 100 kHz |
|---|---|---|
| 1.0 V → 0.9 V, and 0.9 V → 1.0 V | 0.57 ms | 1.34 ms |
| 1.0 V → 0.8 V, and 0.8 V → 1.0 V | 0.93 ms | 1.34 ms |
| 1.0 V → 0.7 V, and 0.7 V → 1.0 V | 1.40 ms | 1.82 ms |
| 1.0 V → 0.6 V, and 0.6 V → 1.0 V | 1.76 ms | 2.30 ms |
| 1.0 V → 0.5 V, and 0.5 V → 1.0 V | 2.24 ms | 2.78 ms |

Each time is the time stamp of a sample. So it is quantised to the sample
interval, and it includes the Write Word that carries the new set-point:
0.095 ms at 400 kHz and 0.38 ms at 100 kHz. Settling grows with the size of
the step, as it did on the board.

The hardware measurement for 1.0 V → 0.5 V at 400 kHz was 2.3 ms. The model's
slew rate was chosen to be of that order, so this agreement is by
construction, not a prediction. Rising and falling steps come out the same
here because the model slews symmetrically. A real regulator need not.

## 8. Departures and choices

These follow the published description:

- the opcode table 0x0–0x5
- the lane map
- PAGE only on lane change
- serialized transactions
- LINEAR16 for voltages and LINEAR11 for telemetry
- the 100 MHz clock, with a 400 kHz or 100 kHz PMBus clock
- the measurement sequence and its 0.1 ms wait
- the settling-time method

These are this design's own:

- **Get Current, opcode 0x6.** The description lists `READ_IOUT` telemetry
  but assigns it no opcode.
- **Clear Status.** The command table lists `CLEAR_FAULTS`, but the opcode
  table says Clear Status is internal only, and the latter is followed.
  `CLEAR_FAULTS` can still be sent by adding an opcode.
- **Under-voltage limits.** Set Under Voltage writes the same value to both
  the warning and the fault limit. A single value is carried per request.
- **Units.** Values are millivolts, `VOUT_EXP = −12`, and all beat layouts
  and status codes are this design's.
- **Telemetry mode.** Periodic current telemetry reuses the sampling loop,
  through the SAMPLE_CURRENT bit.
- **Time base.** The time stamps start at the acceptance of the target
  command.
- **Buffer and registers.** The buffer depth (256), the register map and the
  direct-command register are this design's.
- **PMBus engine.** It has no PEC and no bus timeout. Clock stretching is
  honoured.
- **Register port.** The JTAG bridge is left out: the AXI4-Lite port stands
  where it would connect. The stream width converter of the prototype is not
  needed, because the widths match.

The software control path (a soft processor driving an I²C peripheral) is an
alternative to this RTL and is not included. The transceiver link test of the
case study is not included either. For that study, this RTL only provides the
rail control: a sweep of MGTAVCC from 1.0 V to 0.7 V in 1 mV steps is a series
of direct Set Voltage commands on lane 6.

## 9. Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| top, wrapper | `CLK_HZ` | 100 000 000 | system clock |
| top, wrapper | `SCL_HZ` | 400 000 | PMBus clock (100 000 for slow mode) |
| top, manager, codec | `VOUT_EXP` | −12 | LINEAR16 exponent of the regulator |
| top, test manager | `DEPTH` | 256 | sample buffer entries (raw word, value and 32-bit time stamp: 64 bits each) |
| top, test manager | `WAIT_DEFAULT` | 10 000 | reset value of WAIT_CYCLES |
| top, test manager | `ADDR_W` | 8 | AXI4-Lite address width |
| counter | `WIDTH` | 32 | time-stamp width |

At the defaults the top synthesises to about 640 cells, about 630 flip-flops,
and one 256 × 64 memory.

## 10. Verification

Each testbench compares against values computed independently in the test.
Each prints `TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_kc705_lane_map` | all 16 lane codes against the table |
| `tb_pmbus_linear_codec` | every mV value up to 6 V, random LINEAR16 words, LINEAR11 for every exponent with random mantissas, all against real arithmetic |
| `tb_axis_pmbus_wrapper` | every transaction type bit by bit against the model; exact cycle latencies; address and data NACK; clock stretching; random read-back |
| `tb_power_manager` | opcode expansion for every opcode, PAGE caching, the VCCBRAM example, errors, Clear Status |
| `tb_axis_counter` | random enable and clear against a reference count |
| `tb_voltage_test_manager` | the measurement sequence, the 0.1 ms wait, buffer contents and time stamps, abort on error, current-telemetry mode, direct command; a scripted PowerManager stands in |
| `tb_voltune_sweeps` | the characterisation workload at 400 kHz and 100 kHz side by side: both sweeps, settling times growing with the step, sample intervals; at 400 kHz also the 301-step 1 mV sweep of MGTAVCC from 1.0 V to 0.7 V (helper `voltune_sweep_bench`) |
| `tb_voltune_top` | whole design at default parameters: 1.0 V → 0.5 V run on MGTAVCC against the regulator model, every PMBus transaction, 256 samples, settling time, then direct commands covering current readback, bad lane, bad opcode, NACK from an absent device, Clear Status and clock stretching, and a current-telemetry run; each mechanism is counted and must occur |

`tb/ucd9248_model.sv` is a clocked PMBus slave for up to three devices with
four pages each:

- It answers the nine commands used here and NACKs any other.
- It ramps the output one LSB per `SLEW_CYCLES` toward `VOUT_COMMAND`.
- It can stretch SCL.
- It logs every transaction with its cycle number.

To run a testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/voltune_pkg.sv tb/tb_voltune_top.sv --top-module tb_voltune_top
./obj_dir/Vtb_voltune_top
```

The full-size run (about 1 M cycles) takes a few seconds. The block
testbenches override parameters only where that shortens the run: a faster
SCL in `tb_power_manager`, and a smaller buffer in `tb_voltage_test_manager`.

Lint warnings that remain are deliberate:

- Package constants not used by every module.
- Unused bits of wide intermediate products in the codec and the engine.
- `rst_n` reaching both the flops and the assertion `disable iff` clauses.
