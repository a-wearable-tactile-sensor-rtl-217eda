# Acquisition firmware for a 42-sensor wearable vibration array

Touch contact makes the skin vibrate, and those vibrations travel through the
whole hand. To record them, a glove-like flexible circuit places 42 three-axis
MEMS accelerometers (126 channels) over the back of the hand and fingers. Every
sensor has to be read at well over a kilohertz, and all 42 must be read within
one sample period. A single I2C bus cannot carry that much traffic, so the data-acquisition FPGA drives
**23 I2C buses in parallel, all in lockstep**. Most buses carry **two
sensors**, told apart by their address-select pin (SEL).

This repository holds synthesizable SystemVerilog for that FPGA logic. It
covers the I2C masters, the sampling sequencer, the frame packer and the
transmit buffer toward the USB link. Self-checking testbenches come with it,
including a behavioural accelerometer model. The published instrument gives
the architecture and the sampling protocol. The RTL details (bit timing,
framing, flow control, command codes) are filled in here. They are listed in
[Departures and own choices](#departures-and-own-choices).

## The array as the firmware sees it

The 42 sensors are numbered by finger branch. Numbers 10, 20, 30 and 40 are
not used.

| Branch (digit) | Sensors | Buses (0-based) | SEL-high sensor on bus | SEL-low sensor on bus |
|---|---|---|---|---|
| V   | 1-9   | 0-4   | 1, 3, 5, 7, 9      | 2, 4, 6, 8, none     |
| IV  | 11-19 | 5-9   | 11, 13, 15, 17, 19 | 12, 14, 16, 18, none |
| III | 21-29 | 10-14 | 21 … 29            | 22 … 28, none        |
| II  | 31-39 | 15-19 | 31 … 39            | 32 … 38, none        |
| I   | 41-46 | 20-22 | 41, 43, 45         | 42, 44, 46           |

- Every bus has one sensor with SEL tied high, which answers at I2C address
  `0011101b`. These are the 23 odd-numbered sensors.
- 19 buses have a second sensor with SEL grounded, at address `0011110b`.
  These are the 19 even-numbered sensors.
- The fifth bus of each long branch has only one sensor.
- The parameter `SEL0_WIRED` records which buses carry a SEL-low sensor. Its
  default is `23'b111_01111_01111_01111_01111`.

Because each address is used once per bus, the firmware never addresses
sensors one by one. It sends **one register transaction to every bus at
once**, first with the SEL-high address and then with the SEL-low address.
One transaction therefore returns the same register from 23 sensors (or 19)
in the same cycle.

## One measurement

The host starts a measurement with command byte `0x01` and stops it with
`0x00`. While no measurement is running, the byte `0x10` + k picks the
measurement range for the next start: k = 0, 1, 2, 3, 4 gives ±2, ±4, ±6,
±8, ±16 g. The range after reset is ±2 g, and other bytes are ignored. The
range in use is shown on `fscale`. The sequencer (`acq_ctrl`) then goes through these steps:

1. **Identity check.** It reads WHO_AM_I (register `0x0F`) from the SEL-high
   group, then from the SEL-low group. A sensor counts as present if it
   acknowledges and returns `0x3F`. Removing a branch is therefore just a
   matter of cutting it off the circuit: its sensors fail the check and are
   skipped. The results are visible on `present_sel1` and `present_sel0`.
2. **Configuration.** It writes CTRL_REG5 (`0x24`) to every present
   sensor. The value holds the chosen range in bits 5:3, with the sensor's
   anti-aliasing filter at 800 Hz. Then it writes CTRL_REG4 = `0x9F`. This
   sets a 1600 Hz output rate, turns on block data update and enables X, Y
   and Z.
3. **Sample frames**, repeated until a stop command arrives:
   - It waits until the transmit FIFO has room for a whole frame, then emits
     the frame header.
   - Status poll: it reads STATUS (`0x27`) from all present SEL-high
     sensors. The read is repeated until **every** one has bit 3 (new X/Y/Z
     data) set. Then it does the same for the SEL-low group. So all 42
     sensors hold a new sample before any data is read.
   - Data: it reads `OUT_X_L`, `OUT_X_H`, `OUT_Y_L`, `OUT_Y_H`, `OUT_Z_L`
     and `OUT_Z_H` (`0x28`-`0x2D`) from the SEL-high group, one register per
     transaction, then the same six registers from the SEL-low group.

   A stop command is acted on only at a frame boundary, so the host always
   receives whole frames.

The status poll is what keeps the 42 sensors aligned in time. Their internal
clocks are independent, and the poll ensures that every frame holds one fresh
sample from each sensor. If a sensor's branch is missing, nothing is polled
on it and its slots in the frame are sent as zero.

### Timing

| Item | Cost |
|---|---|
| SCL | 100 MHz / 64 = 1.5625 MHz (the ceiling is 1.6 MHz; the divider rounds up) |
| Register read: START, addr+W, reg, repeated START, addr+R, data+NACK, STOP | 39 SCL periods ≈ 25 µs |
| Register write | 29 SCL periods |
| One frame, if every status poll succeeds at once: 2 × (1 status + 6 data) reads | 14 × 39 = 546 SCL periods ≈ 349 µs |
| Frame rate, if the bus were the limit | ≈ 2860 frames/s |
| Frame rate with the sensors at 1600 Hz | one frame per sensor sample period, ≈ 625 µs |

The published instrument samples at 1310 Hz, a 763 µs interval. In this RTL
the bus traffic takes less than half of that interval. The frame rate
therefore follows the sensors' 1600 Hz output rate, which is higher than the
published rate. In simulation the longest frame took 624 µs, so it fits the
763 µs budget.

Every status poll that finds some sensor without new data costs another
39-period read. The `stat_retries` counter counts these repeats.

## The lockstep buses

This is the least obvious part of the design.

- **Shared timing.** `scl_tick_gen` produces a single strobe four times per
  SCL period. Each `i2c_master` moves through its bits one quarter at a time
  on that strobe:
  - phase 0: set SDA while SCL is low;
  - phase 1: raise SCL;
  - phase 2: sample SDA;
  - phase 3: lower SCL.
- **Common start.** `i2c_bus_array` starts every enabled master in the same
  cycle, and a master's phase counter restarts on `start`. As a result, all
  23 SCL lines switch on the same clock edge. An assertion checks this.
- **Enable mask.** Buses that do not take part in a transaction stay idle,
  with SCL and SDA high. This applies to buses with no SEL-low sensor, or
  with a sensor that failed the identity check. Their result reads as zero.
- **Missing acknowledge.** A master whose slave does not acknowledge ends its
  transaction early with a STOP and raises `nack`. The other masters carry
  on. `busy` stays high until the last master finishes, so the array always
  takes the same time per transaction.
- **Open drain.** Pins are open drain: `scl_low` and `sda_low` pull a line
  low, and `sda_in` reads it. The tristate pads and pull-ups sit outside
  this RTL. Clock stretching is not supported.

## Output stream

Each frame is 255 bytes. Bytes are written into the FIFO in this order:

| Offset | Content |
|---|---|
| 0, 1 | sync bytes `0xA5`, `0x5A` |
| 2 | frame counter (8 bits, increments by one per frame) |
| 3 … 140 | SEL-high group: `X_L` of buses 0…22, then `X_H` of buses 0…22, … `Z_H` of buses 0…22 |
| 141 … 254 | SEL-low group: the same, over the 19 buses that have a SEL-low sensor, in bus order |

Bus b's SEL-high sensor has the number given in the table above. For
example, byte 3 + 6·23 − 1 = 140 is `Z_H` of sensor 45 (bus 22).

Each value is a little-endian 16-bit word in the sensor's own format. With
block data update on, the two bytes of one axis always come from the same
sample. X, Y and Z are read one after another, so Y or Z can come from the
next sample when a new sample lands during the roughly 150 µs read of a
group.

`sample_packer` builds the stream. It takes the 23 bytes of one register
read at once and writes the selected ones to the FIFO, one per clock cycle.

## Flow control

`sync_fifo` (1024 bytes, about four frames) sits between the packer and the
USB side. It has a valid/ready output (`tx_valid`, `tx_ready`, `tx_data`).

- A frame is started only when the FIFO has room for the whole 255 bytes.
  Inside a frame the packer therefore never meets a full FIFO.
- If the host stops reading, the sequencer waits at the frame boundary, and
  `fifo_stalls` counts the cycles it waits. While it waits no sensor is read.
  Samples taken by the sensors during that time are lost, but the frames
  that are sent stay complete and consistent.

## Modules

| File | Role |
|---|---|
| `rtl/tactile_pkg.sv` | constants: bus count, addresses, register numbers, frame header, command codes, `i2c_req_t` |
| `rtl/scl_tick_gen.sv` | quarter-bit strobe shared by all buses |
| `rtl/i2c_master.sv` | one bus: single-register read/write, NACK detection |
| `rtl/i2c_bus_array.sv` | 23 masters in lockstep, address from the SEL group, enable mask |
| `rtl/acq_ctrl.sv` | sampling sequencer: identity check, configuration, status polling, data reads, frame pacing, start/stop |
| `rtl/sample_packer.sv` | header and byte serialisation |
| `rtl/sync_fifo.sv` | transmit buffer |
| `rtl/tactile_daq_top.sv` | top level |

Top-level ports of `tactile_daq_top`:

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (100 MHz assumed by the defaults), synchronous active-low reset |
| `cmd_valid`, `cmd_data` | in | 1, 8 | command byte from the host (`0x01` start, `0x00` stop, `0x10`-`0x14` range) |
| `tx_valid`, `tx_data` / `tx_ready` | out / in | 1, 8 / 1 | frame byte stream to the USB bridge |
| `scl_low`, `sda_low` | out | 23 | open-drain drivers, one per bus |
| `sda_in` | in | 23 | SDA line levels |
| `running` | out | 1 | a measurement is in progress |
| `fscale` | out | 3 | range code in use (0: ±2 g … 4: ±16 g) |
| `present_sel1`, `present_sel0` | out | 23 | sensors that passed the identity check |
| `frames`, `stat_retries`, `fifo_stalls` | out | 32 | frames started, extra status polls, cycles spent waiting for FIFO room |

Parameters: `CLK_HZ` (100 MHz), `SCL_HZ` (1.6 MHz ceiling), `FIFO_DEPTH`
(1024) and `SEL0_WIRED`. For a different clock, change `CLK_HZ`; the SCL
divider follows. For a different circuit, change `SEL0_WIRED`, or `N_BUS` in
the package.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog.

| Testbench | What it exercises |
|---|---|
| `tb/scl_tick_gen_tb.sv` | strobe spacing and rounding, enable |
| `tb/i2c_master_tb.sv` | reads and writes against two sensor models, NACK, read/write lengths, SCL period |
| `tb/i2c_bus_array_tb.sv` | four buses with different sensor populations, lockstep SCL, per-bus results |
| `tb/acq_ctrl_tb.sv` | the command sequence of the sampling protocol against a transaction-level bus stand-in, write values, zero fill, FIFO-room stall, stop, range command |
| `tb/sample_packer_tb.sv` | stream content under random back-pressure |
| `tb/tactile_daq_top_tb.sv` | whole design at default size with 42 sensor models (one silenced): decoded frames, sample sequence, frame period, FIFO stall, stop and restart, range change. Runs in a few seconds. |
| `tb/tactile_daq_branches_tb.sv` | whole design with 6, 9, 15, 18, 24, 27, 33, 36 and 42 sensors attached (whole branches removed) |

`tb/lis3dsh_model.sv` is a behavioural accelerometer. It is an I2C slave with
WHO_AM_I, CTRL_REG4, CTRL_REG5, STATUS and the six output registers, a programmable
output period, and block data update. Sample n of sensor k reads
X = {k, n}, Y = X ^ 0x5555, Z = X + 0x1234, so a checker can tell both the
sensor and the sample from the data.

Run a testbench with Verilator, for example:

```
verilator --binary --timing --assert --top-module tactile_daq_top_tb \
  -y rtl -y tb +libext+.sv -Irtl rtl/tactile_pkg.sv tb/tactile_daq_top_tb.sv
./obj_dir/Vtactile_daq_top_tb
```

Lint a module with
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/tactile_pkg.sv rtl/<module>.sv`.

## How far it can be trusted

- **Checked in simulation:** the protocol order, the lockstep buses, the
  identity check and branch removal, the frame content, the flow control,
  start/stop, and the range setting as written to each sensor. This was
  done against a sensor model written from the accelerometer's register
  map. The model does not scale its data by the range.
- **Not checked:**
  - real silicon, and pad-level I2C timing (rise times, hold times with
    pull-ups);
  - whether the sensor part tolerates 1.56 MHz SCL;
  - any USB bridge.
- **No timing closure.** The logic is small (about 1,870 flip-flops and one
  8 kbit memory) and has not been taken through place and route.

## Departures and own choices

What follows the published instrument:

- 23 buses, 42 sensors, and two sensors per bus split by SEL.
- The two addresses.
- SCL at no more than 1.6 MHz, with all SCL lines synchronized.
- WHO_AM_I checked before each measurement.
- Status registers of all sensors checked before each sample is read.
- The SEL-high group read before the SEL-low group.
- X, Y, Z in order, low byte first.
- Start and stop from the host, and a selectable measurement range (±2 to ±16 g).

Choices made here, because the published description does not give them:

- **Clock.** A 100 MHz system clock, and four timing phases per SCL bit.
- **Register transfers.** Every byte is fetched with its own single-register
  transaction (the published sequence shows the bytes one by one); bursts
  are not used. Sensor register numbers and values are taken from the
  accelerometer's data sheet (WHO_AM_I = `0x3F`, STATUS bit 3, CTRL_REG4, CTRL_REG5).
- **Configuration writes.** The CTRL_REG4 write, with its 1600 Hz rate and
  block data update. The published text names only the sensor's maximum
  output rate. The published text says the range can be selected from ±2
  to ±16 g, but not how. Here the host chooses it between measurements. The
  command codes, the CTRL_REG5 write and the 800 Hz filter setting are
  choices made here.
- **Absent sensors.** Absent sensors are skipped, and their bytes are sent as
  zero in a fixed-length frame.
- **Host protocol.** The frame format (sync bytes, 8-bit counter, byte
  order), the command codes, and stopping at a frame boundary.
- **Buffering.** The 1024-byte FIFO, and the rule that a frame starts only
  when it fits.
- **Bus numbering.** Buses 0-22 are numbered in branch order V, IV, III, II,
  I.
- **Frame rate.** The published 1310 Hz rate is not reproduced exactly,
  because it depends on overheads that are not described. Here the frame
  rate follows the sensors' output rate, and a frame always takes less than
  the published 763 µs interval.

Outside this RTL: the USB bridge, the boot flash, JTAG, power regulation, the
crystal, the accelerometers themselves and the flexible circuit. The same
holds for the host-side analysis: the principal-component projection of each
sensor's vector signal, the similarity score between gestures, and the
distance-weighted interpolation of vibration over a 3D hand model.
