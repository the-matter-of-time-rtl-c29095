# Sensor synchronization hardware for robots: one timer, hardware triggers, stamps at the pins

A robot or autonomous vehicle fuses data from several sensors: cameras, an
IMU, a LiDAR, a Radar. Fusion only works if two samples that carry the same
timestamp describe the same moment. That needs two things:

1. the sensors take their samples at the same time, and
2. every sample gets a timestamp that says exactly when it was taken.

For sensors on different machines the same holds across machines, so every
machine's clock must also follow global time (GPS).

Software cannot do either job precisely. Drivers add different and changing
delays between "trigger now" and the trigger reaching a sensor, and between
a sample arriving and software reading the clock. This design does both jobs
in FPGA logic, around **one counter that is the machine's only clock**:

* The counter is kept on GPS time by the pulse-per-second (PPS) edge and the
  GPS time message.
* The camera and IMU trigger pulses are generated from that counter.
* The LiDAR and Radar start pulses are generated from it too. These sensors
  run on their own once started.
* The counter is read again at the sensor interfaces, where each IMU sample,
  camera frame and Radar frame enters the chip.

So any two events in the system are measured on the same clock, to the
clock cycle. On different machines they are measured on clocks that all
restart their seconds at the same GPS edge.

The architecture follows the FPGA-based synchronization system of Liu et al.,
*The Matter of Time: A General and Efficient System for Precise Sensor
Synchronization in Robotic Computing*. That paper gives the blocks and what
each does, but not their insides. Everything below the block level is this
design's own and is marked as such.

## Block structure

```
  GPS receiver ── serial time msg ──► gps_time_rx ──► next second, PPS pulse ─┐
               ── PPS ───────────────►                                          │
                                                                              ▼
  Arm cores ◄── APB ──► sync_csr ── enables, periods, arm, set ──► trigger_timer
                          ▲                                        │  (machine timer
                          └──────────── status, time ◄────────────┤   + triggers)
                                                                    │
        camera ◄── cam_trig_o ─────────────────────────────────────┤
        IMU    ◄── imu_trig_o ─────────────────────────────────────┤
        LiDAR  ◄── lidar_start_o ──────────────────────────────────┤
        Radar  ◄── radar_start_o ──────────────────────────────────┤
                                                                    │ now (sec, ns)
  IMU serial ◄──────────────► imu_serial_if ──► IMU record {stamp, bytes}   ◄┤
  CAN bus (Radar) ◄─────────► can_rx_ts ──────► Radar record {stamp, frame} ◄┤
  CSI-2 receiver core stream ► mipi_ts ───────► header beat + frame, record ◄┘
```

`sync_system_top` holds all of these. Some parts come from elsewhere and are
not part of this RTL; their signals are ports of the top:

* the MIPI CSI-2 receiver, a vendor IP core with an analog D-PHY;
* the Ethernet MAC that receives LiDAR frames;
* the Arm cores;
* the memory interface and the bus.

The LiDAR stamps its own frames using PTP (the Precision Time Protocol).
PTP software on the Arm cores keeps the machine timer in line through the
software-set register. The top brings the machine time out on `now_o` for an
Ethernet timestamp unit.

## The machine timer (`trigger_timer`)

**Format.** Time is `{sec[31:0], ns[29:0]}`: seconds of UTC and nanoseconds
within the second, the same layout as a PTP timestamp with the seconds cut to
32 bits. Every clock the nanoseconds grow by `NS_INC = 1e9 / CLK_HZ`, which
is 10 at the default 100 MHz. `CLK_HZ` must divide 1e9 so that a second is a
whole number of clocks; an elaboration-time assertion checks this. When the
nanoseconds pass 999 999 999 they wrap and the second counts up. The first
clock of a second is flagged by `sec_start_o`.

**GPS discipline.** A GPS receiver sends two things:

* a PPS line, whose rising edge is the exact start of a second;
* a serial message saying which second that edge starts.

`gps_time_rx` handles both:

* It checks the message and holds the announced second until the next PPS.
* It brings the PPS edge through a two-flop synchronizer and outputs it as a
  one-clock pulse, 3 clocks after the pin rises.

On that pulse the timer loads:

* `sec` = the announced second. If no message arrived, the current second is
  rounded to the nearest whole second.
* `ns` = 3 × `NS_INC`, the synchronizer latency added back.

After the load, the timer reads what it would have read had it seen the PPS
edge at the pin with no delay. The remaining error is below one clock.

**Drift reading.** At each PPS the timer stores its own free-running reading
of the edge in `pps_err_ns_o` (register `PPS_ERR_NS`). The value is:

* 0 when the timer was in step;
* small when the timer ran fast;
* close to 1e9 when it ran slow.

Software can use it to watch the local oscillator.

**Software set.** Writing `SET_SEC` and `SET_NS` and then `CMD` loads the
timer at once. PTP software on the Arm cores uses this. There is no frequency
trim. The timer is corrected only by such steps and by the PPS loads.

`time_valid_o` rises after the first PPS that comes with a message, or after
a software set.

## The trigger grid

This is the part that makes triggers line up within a machine and across
machines.

**Periodic channels.** Each channel has a period in nanoseconds and fires at
every instant of the second that is a whole multiple of that period, counted
from the start of the second. Channel 0 drives the camera trigger and
channel 1 the IMU trigger. Every firing gives:

* `fire_o[k]` for one clock;
* a trigger pulse `PULSE_CYC` clocks wide on `trig_o[k]`.

Three things follow from the grid:

* **Every channel fires at the start of each second.** Each machine's seconds
  begin at the same GPS edge, so on all machines a channel with a given
  period fires at the same instants.
* **Channels whose periods divide each other fire in the same clock.** With a
  50 ms camera and a 5 ms IMU, every camera trigger comes with an IMU
  trigger. This realises the paper's rule that trigger rates must divide each
  other.
* **If a period does not divide one second, the last interval of the second
  is short**, because the grid restarts at the boundary. For 30 Hz, write
  33 333 334 ns rather than 33 333 333: the latter would fire a 31st time,
  10 ns before the boundary.

**Rules at jumps.** The grid is read from the timer, so the rules cover what
happens when the timer jumps:

| Event | Behaviour |
|---|---|
| Channel enabled in mid-second | Waits for the next second boundary, so it never starts off the grid. |
| Software set | Every channel waits for the next second boundary. Start pulses wait too. |
| PPS finds the timer fast (nanoseconds below one half second, boundary already passed) | Only the phase is corrected. No second boundary firing. |
| PPS finds the timer slow (nanoseconds above one half second, boundary not reached yet) | The PPS load itself starts the new second. The boundary firing comes 3 clocks after the true edge, once, and the grid then continues exactly. |
| First PPS after reset | Treated like the slow case, because the loaded second differs from the running one. |

**Start channels.** LiDAR and Radar sample on their own timing once they get
a start signal. Writing `ARM` arms a start channel. The channel then sends
one `PULSE_CYC`-wide pulse at the next second boundary, in the same clock as
the periodic channels' boundary firing. The free-running sensors therefore
start in step with the triggered ones.

**Output timing.** `fire_o`, `trig_o` and `start_o` rise one clock after the
clock in which `now_o` shows the firing instant. The offset is the same every
time, so it cancels between sensors.

## Stamping at the interfaces

Each port takes its stamp at the first moment the sample is visible in the
fabric. The latency from pin to stamp is fixed. The design leaves it in the
stamp, and software removes it together with each sensor's own known delay.

| Port | Stamp taken at | Stamp − pin event | Record |
|---|---|---|---|
| `imu_serial_if` | falling edge of the first start bit of a sample | +3 clocks | `imu_rec_t`: stamp, length, up to 32 bytes |
| `can_rx_ts` | falling edge of the start-of-frame bit | +2 clocks | `can_rec_t`: stamp, 11-bit ID, RTR, DLC, 8 data bytes |
| `mipi_ts` | first clock the start-of-frame beat is valid on the stream | 0 (relative to the receiver core's output) | header beat in the stream and `cam_rec_t`: stamp, frame number |

**IMU serial port.** The IMU sample bytes arrive as 8N1 serial data.

* A sample ends after `PKT_BYTES` bytes, if that parameter is non-zero.
* Otherwise it ends after an idle gap of `GAP_BITS` bit times, or at 32 bytes.
* A glitch on the line moves the stamp only if it is confirmed as a real
  start bit at mid-bit.
* A byte with a bad stop bit drops the sample and is counted.
* The port also sends the other way, for configuring the IMU. A byte written
  to the `IMU_TX` register goes out on `imu_uart_tx_o` as 8N1, at the same
  baud rate.
* Software polls STATUS bit 2 before each write. A byte written while the
  transmitter is busy is dropped.
* Bytes offered back to back leave with no idle time between them.

**CAN port.** The Radar's CAN frames follow CAN 2.0A.

* The receiver waits for 11 recessive bits, latches the stamp at the
  start-of-frame edge, and then re-aligns the bit phase at every
  recessive-to-dominant edge.
* It samples at 70 % of the bit, removes the stuff bits and checks them,
  parses the header, data and CRC-15, and drives the ACK slot for good frames.
* It does not transmit error frames, and it drops extended (29-bit ID)
  frames.
* Frames whose bit time is up to 2.5 % off are decoded; the testbench tries
  both directions.

**Camera stream.** The CSI-2 receiver core sends an AXI4-Stream, with `tuser`
marking the start of frame and `tlast` the end of each line.

* When a start-of-frame beat appears, `mipi_ts` stalls the input for one
  clock and sends a header beat (`m_tuser[1]=1`) holding the stamp.
* The frame then passes unchanged.
* A frame costs one extra clock. Assertions check the AXI4-Stream hold rules
  on both sides.

## Registers (`sync_csr`, APB3, no wait states)

| Addr | Name | Access | Meaning |
|---|---|---|---|
| 0x00 | CTRL | rw | bit k enables trigger channel k (0 camera, 1 IMU) |
| 0x04 | ARM | w / r | write 1 to arm a start pulse (bit 0 LiDAR, bit 1 Radar); read gives the armed flags |
| 0x08 + 4k | PERIOD_k | rw | period of channel k in ns; reset: 50 000 000 (camera, 20 Hz), 5 000 000 (IMU, 200 Hz) |
| 0x20 | SET_SEC | rw | seconds to load |
| 0x24 | SET_NS | rw | nanoseconds to load |
| 0x28 | CMD | w | bit 0: load the timer from SET_SEC/SET_NS |
| 0x30 | TIME_SEC | r | timer seconds; the read also latches TIME_NS |
| 0x34 | TIME_NS | r | nanoseconds latched by the last TIME_SEC read |
| 0x38 | STATUS | r | bit 0 time valid; bit 1 GPS second waiting for its PPS; bit 2 IMU command transmitter ready |
| 0x3C | PPS_ERR_NS | r | timer's reading of the last PPS edge |
| 0x40 | GPS_SEC | r | last second announced by GPS |
| 0x44 / 0x48 / 0x4C | GPS_ERR / IMU_ERR / CAN_ERR | r | error counters |
| 0x50 | IMU_TX | w | bits 7:0: byte to send to the IMU |

Unmapped addresses answer with PSLVERR.

## GPS time message

The paper gives no message format. This design uses a 6-byte binary message,
sent 8N1:

```
0xA5, sec[7:0], sec[15:8], sec[23:16], sec[31:24], sec[7:0]^sec[15:8]^sec[23:16]^sec[31:24]
```

`sec` is the UTC second that begins at the **next** PPS edge. A real receiver
would need a small converter in front, or a parser for its own protocol (NMEA
or binary) in place of `gps_time_rx`'s byte parser. Replacing the GPS receiver
with another time source that has a pulse and a message, such as a
spacecraft clock, needs only that parser.

## Parameters

| Parameter (module) | Default | Where from |
|---|---|---|
| `CLK_HZ` (top, timer) | 100 000 000 | own choice; must divide 1e9 |
| `GPS_BAUD` (top) | 9600 | own choice |
| `IMU_BAUD` (top) | 115 200 | own choice |
| `CAN_BPS` (top) | 500 000 | own choice |
| `CAM_DATA_W` (top) | 64 | own choice; must hold a 62-bit stamp |
| `PULSE_CYC` (top, timer) | 1000 (10 µs) | own choice |
| `NUM_TRIG`, `NUM_START` (timer, CSR) | 2, 2 | one camera and one IMU, one LiDAR and one Radar, as in the paper's figures |
| `PPS_LAT_CYC` (timer) | 3 | follows from the synchronizer in `gps_time_rx` |
| `PKT_BYTES`, `GAP_BITS` (IMU port) | 0, 20 | own choice |
| `SAMPLE_CYC` (CAN port) | 70 % of a bit | own choice |

The paper gives no clock frequency, baud rate or sensor rate. It gives two
constraints. Camera and IMU must be triggered within a few clock cycles of
each other. The variation across sensors must stay below 1 ms. The design
meets both by construction. The paper reports 6.9K LUTs and 7.1K registers
for its own circuits. This RTL synthesizes, with generic mapping, to about
1370 flip-flops. The paper's circuits hold more than it describes, so the two
numbers should not be compared closely.

## Where this departs from the paper, or stops short of it

* **Block insides.** The paper describes every block by its function only.
  All the following are this design's own: the grid alignment of triggers,
  the PPS handling, the message format, framing, the register map and the
  record layouts.
* **IMU command direction.** The paper draws the IMU link in both directions
  but says nothing about what goes to the IMU. Here it is a plain byte
  transmitter. Any IMU command protocol is left to software.
* **CAN interface.** The CAN port receives and acknowledges only. There is no
  transmit path, no error frames and no extended frames. In the paper it is
  labelled "CAN interface & timer". Here it has no timer of its own: it uses
  the shared machine timer, which is what the paper's second principle asks
  for.
* **LiDAR timestamps and PTP.** LiDAR time-stamping and the PTP protocol are
  left to the LiDAR, the Ethernet core and software, as in the paper. There
  is no hardware PTP timestamp unit on the Ethernet path.
* **Bus to memory and the Arm cores.** The figure shows one shared bus whose
  protocol the paper does not name. It is replaced by an APB register port
  and record outputs with a valid strobe and no back-pressure. A DMA engine
  that writes records to memory must take one record per strobe.
* **Start wires.** The paper's block diagram draws no wire from the trigger
  unit to the LiDAR or the Radar. Its text, however, has the shared timer
  send them their start signal. The `lidar_start_o` and `radar_start_o`
  outputs follow the text. The pulse, and arming it from a register, are
  this design's own.
* **Rate divisibility.** The paper notes that the trigger rates of the
  free-running sensors must divide those of the triggered ones, or the other
  way round. This design does not check that: the LiDAR and Radar rates are
  set inside those sensors.

## Verification

Every block has a self-checking testbench in `tb/`. The serial receiver and
transmitter helpers are tested through the ports that use them. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. Sensor
behaviour comes from models in `tb/`:

* `gps_model`: PPS plus time messages;
* `imu_model`: answers each trigger with a serial sample, and decodes command bytes;
* `camera_model`: answers each trigger with a frame on the stream;
* `radar_model`: once started, sends CAN frames on its own period, with its
  own CRC and stuffing.

| Testbench | What it shows |
|---|---|
| `tb_gps_time_rx` | messages accepted and rejected (checksum, stop bit, garbage); PPS pulse one clock wide, 3 clocks after the pin |
| `tb_trigger_timer` | timer rate and wrap; GPS load; grid firing, 10 and 100 firings per second, coincidence; pulse width; start pulses; PPS in both directions with no lost or doubled boundary; waiting after a software set |
| `tb_imu_serial_if` | random samples of 1–32 bytes; stamp exactly 3 clocks after the first start edge; split at 32 bytes; fixed-length framing; framing error; command bytes, some back to back and some offered while busy, decoded at every clock of the line |
| `tb_can_rx_ts` | 40 random frames, including all-zero and all-one data, RTR, DLC > 8, and bit time ±2.5 %; stamp exactly 2 clocks after SOF; ACK only on good frames; CRC, stuff and extended frames dropped |
| `tb_mipi_ts` | random frames under random input gaps and output back-pressure; header stamp, frame numbers; one clock per header |
| `tb_sync_csr` | every register, pulses, IMU_TX ignored while busy, PSLVERR |
| `tb_sync_system_top` | whole system at a 100 kHz clock over 2.6 s (see below) |
| `tb_sync_full` | whole system at default parameters, 29 ms after the first PPS |

**`tb_sync_system_top`** runs the whole system at a 100 kHz clock over 2.6
simulated seconds. It checks:

* the GPS load, and that the timer is found in step at the next PPS
  (`PPS_ERR_NS` = 0);
* 10 camera and 100 IMU triggers per second, every camera trigger with an
  IMU one;
* the start pulses coinciding with triggers;
* for every IMU sample and camera frame, a stamp at the same distance from
  its trigger (zero spread);
* Radar frames stamped exactly one Radar period apart;
* that triggers resume at the boundary after a software set;
* that command bytes written to `IMU_TX` reach the IMU model.

It counts each mechanism and fails if one never happened.

**`tb_sync_full`** runs the same monitors with the top at its default
parameters: 100 MHz, real baud and bit rates, 20 Hz camera and 200 Hz IMU.
It covers one IMU command byte and 29 ms of sensor traffic after the first
PPS, but not the software set. It takes a few seconds of wall time.

Run any testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sync_pkg.sv tb/tb_sync_system_top.sv --top-module tb_sync_system_top
./obj_dir/Vtb_sync_system_top
```

The testbenches reset the design through a real falling edge of `rst_n` and
do not rely on initial values. The RTL uses asynchronous active-low reset
throughout.

**Not verified here:**

* behaviour against real sensors or a real GPS receiver;
* clock-domain crossings other than the synchronized serial, CAN and PPS
  inputs (the camera stream is assumed to be on the fabric clock);
* timing closure on an FPGA.

## Files

* `rtl/sync_pkg.sv`: timestamp type and record structs.
* `rtl/uart_rx.sv`: 8N1 receiver shared by the two serial ports.
* `rtl/uart_tx.sv`: 8N1 transmitter for the IMU command bytes.
* `rtl/gps_time_rx.sv`, `rtl/trigger_timer.sv`, `rtl/imu_serial_if.sv`,
  `rtl/can_rx_ts.sv`, `rtl/mipi_ts.sv`, `rtl/sync_csr.sv`: the blocks above.
* `rtl/sync_system_top.sv`: the top.
* `tb/`: testbenches and the sensor and GPS models.
