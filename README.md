# LDSI event-camera node: noise filtering and ball tracking on an FPGA POWERLINK node

An event camera reports pixels, not frames. Each event says that one pixel's
brightness changed, and when. A ball moving over a table makes a dense trail
of such events. Sensor noise makes sparse ones scattered over the whole array.
This design sits between a 128 x 128 Selective Change Driven (SCD) event
camera and an industrial POWERLINK network. It removes the noise with a small
two-layer network of integrate-and-fire units called LDSI ("Less Data, Same
Information"). It picks the ball position out of the events that survive, and
hands that position to the network's managing node, which steers a two-axis
robot. The managing node sends the filter and tracker settings back the same
way.

The RTL covers the whole FPGA side of the node. The camera, the POWERLINK
communication module and the managing node are external devices. The
testbenches have small behavioural models of the camera and of the
communication module.

```
 camera pins                                                        POWERLINK module
 cam_clk, cam_en  <-+                                               (host bus)
 cam_valid,x,y   ---+-> scd_cam_if --> ldsi_filter --------------> vicinity_tracker
                        ms time-stamp  | ldsi_dlayer -> ldsi_alayer|  20-event window
                                       +---------------------------+        |
                                                                  pos_x/pos_y
                                                                            v
        cfg (acq_en, LDSI parameters, vicinity) <----------------- pl_process_data <-> bus_*
```

All stages are joined by valid/ready handshakes (`ev`, `ev_valid`,
`ev_ready`). A stage that is busy stalls the one before it, all the way back
to the camera, whose readout clock then stops.

## 1. The LDSI filter

### 1.1 Layers

The filter is a chain of four layers:

| layer  | size | what it is in this RTL |
|--------|------|------------------------|
| Slayer | M x N = 128 x 128 | the sensor; its events enter the filter |
| Dlayer | (M-2) x (N-2) = 126 x 126 units | `ldsi_dlayer` |
| Alayer | (M-2) x (N-2) units | `ldsi_alayer` |
| Player | (M-2) x (N-2) | the events that leave the Alayer (`ldsi_filter.ev_o`) |

Sensor pixel (x, y) feeds Dlayer unit (x-1, y-1). Events on the sensor's
outer ring (x or y equal to 0 or 127) are dropped, so that no later layer
sees the edge of the sensor. Output events use the 0..125 coordinates of the
inner layers.

### 1.2 The unit

Every Dlayer and Alayer unit holds two numbers:

* a **potential** (5 bits, saturating at 31);
* **LT**, the millisecond time-stamp of the last event that reached it
  (16 bits, wrapping).

When an event with time-stamp AT reaches a unit with excitation `inc`,
decay `dec` and threshold `thr`, the unit does the following
(`ldsi_pkg::unit_update`):

1. `DT = AT - LT` (modulo 2^16). If `DT > MTR`, the potential drops by `dec`,
   but not below 0.
2. The potential grows by `inc`, saturating at 31.
3. If the potential is now `>= thr`, the unit fires and its potential
   restarts at 0.
4. `LT = AT`.

The decay is applied lazily, when the next event arrives, and at most once
per event however long the unit was idle. No timer sweeps the arrays. The
effect is that a unit only reaches its threshold if its events arrive close
together: an isolated noise event leaves a small potential that the next,
late event first decays away.

### 1.3 Parameters

All parameters are set at run time by the managing node (section 4). The
reset values are in `ldsi_pkg::NODE_CFG_DEFAULT`.

| name | used by | meaning | field | reset |
|------|---------|---------|-------|-------|
| ERCO | Dlayer | excitation from the same-address sensor pixel | 4 bit | 3 |
| TCE  | Dlayer | firing threshold | 4 bit | 6 |
| DERP | Dlayer | decay step | 4 bit | 1 |
| ERCN | Alayer | excitation of the same-address unit by a Dlayer event | 4 bit | 3 |
| ERNC | Alayer | excitation of each neighbouring unit | 4 bit | 1 |
| TNE  | Alayer | firing threshold | 4 bit | 6 |
| DERC | Alayer | decay step | 4 bit | 1 |
| MTR  | both   | maximum time to remember, ms | 16 bit | 500 |
| DL   | Alayer | depth level: neighbourhood half-width | 3 bit | 1 |

Useful values of the excitations, thresholds and decays lie between 0 and
10. MTR is typically around 500 ms: a shorter MTR makes the
filter stricter.

### 1.4 Dlayer (`ldsi_dlayer`)

Each accepted sensor event updates one unit with (ERCO, DERP, TCE). If the
unit fires, the block offers an event with the unit's address and the
sensor event's time-stamp to the Alayer. It holds that event until the Alayer
takes it, and takes no new input meanwhile.

The unit state sits in a RAM of 126*126 = 15,876 words of 21 bits, with a
registered read. The unit is read in the clock that accepts the event and
written back in the next. So the Dlayer takes **one event every 2 clocks**
when its output is free.

### 1.5 Alayer (`ldsi_alayer`)

A Dlayer event at (x, y) excites the square of units from (x-DL, y-DL) to
(x+DL, y+DL). The centre unit gets ERCN and the others get ERNC. Units
outside the layer are skipped. Every excited unit uses (DERC, TNE). Any of
them may fire, centre or neighbour, and each firing is one output (Player)
event carrying that unit's address.

The square is walked row by row: 2 clocks per unit inside the layer and 1
clock per position outside it. A Dlayer event therefore keeps the Alayer busy
for 2(2DL+1)^2 clocks in the middle of the layer (18 clocks at DL = 1),
plus the time each output event waits to be taken. The Alayer RAM has the
same size and layout as the Dlayer RAM.

This neighbourhood is what makes the filter spatial. A lone noisy pixel that
does get through the Dlayer excites its neighbours only by ERNC. A ball, which
fires many adjacent Dlayer units, raises a whole patch of Alayer units over
TNE.

Both layers clear their RAMs after reset, one word per clock (15,876 clocks
at full size). `init_done` signals the end of the clearing, and the filter
takes no events before then.

## 2. Tracker (`vicinity_tracker`)

The tracker collects 20 consecutive Player events (`WIN`). It scores each
one by how many of the other 19 lie within `vic_r` units of it in both x and
y. The best-scoring event is the ball position. On equal scores the later
event wins, so the newest position is preferred. Windows do not overlap.

Timing: the tracker takes one event per clock while collecting. After the
20th event it scores one candidate per clock against all 20 in parallel.
`pos_valid` pulses WIN + 1 = 21 clocks after the 20th event is accepted.
Its input is stalled during those clocks.

## 3. Camera readout (`scd_cam_if`)

The FPGA drives the camera's readout clock `cam_clk` and its acquisition
enable `cam_en`. The camera presents an event (`cam_valid`, `cam_x`, `cam_y`)
while `cam_clk` is low. The FPGA samples it in the clock in which it raises
`cam_clk`, and that rising edge moves the camera to its next event. `cam_clk`
has a half period of `CLK_DIV` = 8 system clocks, so the node reads at most
one event per 16 clocks (6.25 M events/s at 100 MHz).

If the sampled event has not yet been taken by the filter, the readout clock
stays low and the camera waits. That is how the node throttles the camera.
Each event is stamped with `ts_now`, a millisecond counter that advances
once per `CLK_PER_MS` = 100,000 clocks.

This pin protocol is a generic stand-in. The SCD sensor's actual readout
interface is defined by its own documentation. Adapting to it means changing
this module only.

## 4. Process data (`pl_process_data`)

The node talks to the POWERLINK network through a communication module
(HMS Anybus CompactCom). The managing node reads and writes the module's
process-data memory every network cycle. `pl_process_data` is the FPGA's side
of that memory. Every `UPDATE_CYCLES` = 100,000 clocks (1 ms) it writes three
words and reads four:

| word address | direction | contents |
|--------------|-----------|----------|
| 0x000 | node -> MN | x of the latest position (0..125) |
| 0x001 | node -> MN | y of the latest position |
| 0x002 | node -> MN | number of positions found (wraps at 65536) |
| 0x100 | MN -> node | [15] valid, [14] acq_en, [6:4] DL, [3:0] vicinity |
| 0x101 | MN -> node | [15:12] ERCO, [11:8] ERCN, [7:4] ERNC, [3:0] TCE |
| 0x102 | MN -> node | [15:12] TNE, [11:8] DERP, [7:4] DERC |
| 0x103 | MN -> node | MTR in ms |

The configuration is loaded only if the valid bit is set. After reset the
node keeps acquisition off until a valid configuration with `acq_en` = 1
arrives. The host bus is a simple synchronous one: `bus_req` with `bus_we`,
`bus_addr` and `bus_wdata` is held until a one-clock `bus_ack`, and read data
comes with the ack. Assertions in the module check that rule.

The word layout and the bus are this design's own. A real Anybus host
interface (parallel or SPI) needs an adapter. The module's Ethernet,
POWERLINK and diagnostic objects and its SDO (service data) channel are not
modelled here.

## 5. Size and speed at the default parameters

* RAM: 2 x 15,876 x 21 = 666,792 bits (two layer RAMs), about 1,100
  flip-flops and under 1,000 word-level cells besides.
* Reset clearing: 15,876 clocks (0.16 ms at 100 MHz).
* Throughput: one camera event per 16 clocks at most. A non-firing event
  costs the Dlayer 2 clocks. Each Dlayer firing costs the Alayer 2(2DL+1)^2
  clocks, and while the Alayer is busy the chain back to the camera stalls.

## 6. What follows the published algorithm and what does not

Taken from the published description: the layer chain and sizes; the border
removal; the parameter set and its meaning; the rule of decaying when DT
exceeds MTR, adding the excitation and firing at the threshold; ERCN for the
same address and ERNC for the neighbours within DL; the 20-event tracker with
the most-neighbours rule and the later-event tie-break; the node's data flow
(camera -> filter -> tracker -> POWERLINK, configuration back).

Choices made here where the description is silent or loose:

* **Restart at 0 after firing.** The published description says only that a
  unit emits an event when it reaches its threshold. It does not give the
  potential afterwards.
* **Decay once per event, applied on arrival.** The text describes the decay
  both as something that happens after MTR has elapsed and as depending on
  the DT between two events. A timer-driven decay of every unit would need a sweep
  of both RAMs. With lazy decay, a unit idle for many MTR periods loses only
  one step.
* **ERCN vs ERNC.** One sentence gives ERNC as the increment of the XY unit
  as well as its neighbours, another gives ERCN for the XY unit. ERCN is used for
  the centre and ERNC for the neighbours, which matches the published worked
  example of one Dlayer unit, its Alayer unit and a neighbour.
* **Square neighbourhood** of half-width DL, and DL at most 7.
* **Square vicinity** of half-width `vic_r` (run-time, 0..15) in the
  tracker, and non-overlapping windows.
* Widths: 4-bit parameters, 5-bit potentials, 16-bit millisecond
  time-stamps. After 65.5 s of silence a unit's DT wraps, so a stale unit may
  skip one decay.
* The camera pin protocol, the process-data layout and bus, and the clock
  rates (100 MHz system clock, 1 ms exchange).

Not included: the camera itself, the POWERLINK communication module, the
managing node with its inverse kinematics for the robot, the servo drive, the
I/O node and the frame-based comparison system. Event polarity is not
carried, since the filter does not use it.

## 7. Files

`rtl/`

* `ldsi_pkg.sv`: widths, `event_t`, `ldsi_cfg_t`, `node_cfg_t`, reset
  configuration, `unit_update()`.
* `scd_cam_if.sv`, `ldsi_dlayer.sv`, `ldsi_alayer.sv`, `ldsi_filter.sv`,
  `vicinity_tracker.sv`, `pl_process_data.sv`: the blocks above.
* `fpga_cn_top.sv`: the node. Parameters `M`, `N` (sensor size), `WIN`,
  `CLK_DIV`, `CLK_PER_MS`, `UPDATE_CYCLES`.

`tb/`

* `ldsi_ref_pkg.sv`: an independent integer reference model of the two
  layers and of the tracker.
* `scd_camera_model.sv`, `anybus_model.sv`: behavioural camera and
  process-data memory.
* `tb_<block>.sv`: one self-checking testbench per block.
  * The layer and filter tests use 12 x 12 and 16 x 16 sensors and compare
    every output event with the reference. They also check the 2-clock and
    2(2DL+1)^2-clock timings.
  * The tracker test checks winners, counts, tie-breaks and the WIN + 1
    latency.
  * The camera test checks ordering, time-stamps, the readout clock and the
    stall behaviour.
  * The process-data test checks the word map, the valid bit and the
    exchange period.
* `tb_ldsi_filter_levels.sv`: the filter at full size on one scene, a ball
  crossing the sensor with 20 % random noise, run with low, medium and high
  filtering parameters. It checks every event against the reference. It also
  checks that output events and noise both drop as filtering gets stricter.
  In one run, 3000 input events gave 12,268, 1,383 and 109 output events.
  At the low level a single Dlayer event can make a whole neighbourhood of
  Alayer units fire.
* `tb_fpga_cn_top.sv`: the whole node at its default parameters. The
  "managing node" switches acquisition on, a ball crosses the sensor with
  noise and border pixels, and every Player event and every position is
  compared with the reference. The test also confirms that each mechanism
  occurred: border drop, decay, Dlayer firing, neighbour firing,
  Dlayer-to-Alayer stall, camera hold, tie-break and configuration load.
  About 12 ms of node time takes about a second to simulate.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. To run one with Verilator (5.x):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ldsi_pkg.sv tb/ldsi_ref_pkg.sv tb/tb_fpga_cn_top.sv --top-module tb_fpga_cn_top
./obj_dir/Vtb_fpga_cn_top
```

Replace `tb_fpga_cn_top` with any other `tb_*` name. The simulations assume
two-state logic: every register that is read is reset.

## 8. Changing the design

* **Sensor size:** `M`, `N` on `fpga_cn_top` (the layer RAMs scale as
  (M-2)(N-2)). `COORD_W` in `ldsi_pkg` must cover the larger of M and N.
* **Clock rate:** `CLK_PER_MS` (time-stamp unit), `CLK_DIV` (camera readout
  rate), `UPDATE_CYCLES` (process-data period).
* **Tracker window:** `WIN`.
* **Field widths:** `PAR_W`, `POT_W`, `DL_W`, `VR_W`, `TS_W` in `ldsi_pkg`.
  The process-data word map in `pl_process_data` assumes the default widths.
