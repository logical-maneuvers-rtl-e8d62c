# Delay-sensor fault monitor for a soft RISC-V processor

A processor in orbit can be hit by radiation, or by a hostile payload that
injects voltage or electromagnetic glitches through a shared supply. Sometimes
the result is permanent damage to part of the chip. Error-correcting codes and
triple redundancy do not handle this well. The recovery scheme here instead
works in two steps: **sense** the disturbance on the chip, then **respond**.
The response recompiles software so that it avoids a broken functional unit.
If the damage is wider, the processor is re-placed into an undamaged region of
the FPGA by partial reconfiguration.

This repository gives RTL for the on-chip sensing and alerting path:

```
           tdc_clk (sample clock, faster than the core)          core_clk
 ┌─────────────┐   sens   ┌────────────────┐ nmi_req ┌──────┐  ┌───────────┐
 │ tdc_sensor 0├─────────►│                ├────────►│ sync ├─►│           │ redirect / vector
 │ (beside ALU)│          │ tdc_controller │         └──────┘  │ nmi_unit  ├──► core fetch
 ├─────────────┤          │ HW, window,    │◄── ack ◄─ sync ◄──┤ (CSRs)    │
 │ tdc_sensor 1├─────────►│ tags, NMI req  │                   └───────────┘
 └──────▲──────┘          └──┬────────┬────┘
        │ calib     hw       │ thr     │ rep_min / rep_seen
 ┌──────┴────────────────────▼──┐  ┌───▼──────────┐
 │ tdc_calibrator               │  │ tdc_readback │──► uart_txd (to housekeeping)
 └──────────────────────────────┘  └──────────────┘   fault_tags (to housekeeping)
```

The processor core (a Rocket RV32 core in the reference system) is outside
this RTL. So are its memories and the radiation-hardened housekeeping
microcontroller. The same goes for the binary translator that rewrites
programs and for the bitstream and ICAP path used for reconfiguration. The core
connects through the `nmi_unit` ports. The housekeeping controller connects
through `cal_start`, `tag_clear`, `fault_tags` and the UART line.

## How a delay sensor sees a glitch

`tdc_sensor` is a time-to-digital converter (TDC) built from an FPGA carry
chain. The reference clock goes through an *initial calibrated delay* and then
along a chain of 128 carry elements. Each element output is captured by a
flip-flop that is clocked by the same reference clock. On each rising edge the
register therefore shows how far the previous falling clock edge has travelled
down the chain:

* taps the edge has already passed read 0;
* the other taps read 1.

The Hamming weight (HW, the number of ones) of the 128-bit word measures the
gate delay beside the sensor. Gate delay depends on the local supply voltage,
so a voltage droop, a laser spot or a particle strike moves the HW.

A sensor is *calibrated* when its HW sits at half the width, 64. At that point
the edge falls in the middle of the observable chain. The initial delay is
tuned to reach this. It consists of a fixed base delay followed by 32 small
delay stages (look-up tables used as delay elements). The setting `calib`
chooses how many of these stages are in the path.

In the reference experiments the HW of an undisturbed sensor stays within a
few counts of 64. A laser aimed near the ALU pulls the nearby sensor's HW down
by tens of counts for single samples, while a distant sensor does not move.
That locality is why each sensor carries a **tag** that names the block it
watches. Sensor 0 watches the ALU.

The sensor in `rtl/tdc_sensor.sv` is a **behavioural model**. On silicon its
function comes from placement and physical delay, which synthesis cannot
express. The model reproduces the structure with simulation delays:

* base delay 455 ps;
* 10 ps per calibration stage;
* 10 ps per carry element.

The model has one input that the real sensor lacks: `skew_ps`, the
disturbance, which is added to the initial delay. With a 400 MHz reference
clock the bit equation is simple. Tap `i` reads 1 when its total delay
`d_i = 455 + skew + 10*calib + 10*(i+1)` ps lies between half a period and one
period. `tb_tdc_sensor` checks exactly this. A change of 10 ps moves the HW by
one count. The model has one limitation: each delay stage must stay shorter
than half a reference period.

## From weights to an interrupt: `tdc_controller`

Every sample clock the controller does the following:

1. It registers each sensor word. This extra rank exists because the sensor
   flip-flops are deliberately run near metastability.
2. It computes the HW (`hw`).
3. It compares the HW with the sensor's window `[thr_lo, thr_hi]`.

A sample outside the window is a *violation*. A violation:

* sets the sensor's **fault tag**, which stays set until the housekeeping side
  pulses `tag_clear`;
* sets **`nmi_req`**, which stays set until the core acknowledges. If a new
  violation arrives in the same cycle as the acknowledge, the request stays
  set, so no event is lost;
* marks the sensor's next readback report.

The controller also tracks each sensor's **minimum HW** since the last report,
so that a single-sample dip between two UART frames still reaches the
housekeeping controller.

Latency: a sensor word captured at edge *k* has its HW at *k+1*. Its violation,
tag and `nmi_req` appear at *k+2*. The `nmi_req` then crosses into the core
clock domain through two flip-flops.

Detection is gated by `enable`. The top level enables it only after a
calibration has finished, and never while one is running.

## Calibration and thresholds: `tdc_calibrator`

The reference flow calibrates offline. Here the calibrator does the same job
in hardware, for all sensors in parallel:

1. **Sweep.** For each setting 0..32 it waits 8 cycles (`SETTLE`) for the
   sensor and the HW pipeline to follow. It then sums 2^`AVG_LOG` = 256
   weights. Per sensor it keeps the setting whose sum is closest to
   64 × 256; on a tie the first such setting wins.
2. **Window.** With the winning settings applied it records the smallest and
   largest HW over another 256 samples. It then sets
   `thr_lo = min - MARGIN` and `thr_hi = max + MARGIN`, with `MARGIN = 4`,
   clamped to the range 0..128.

A calibration takes about (32 + 2) × (8 + 256) ≈ 9000 sample cycles.

Before the first calibration:

* the settings are 16;
* the window is 0..128, which never alarms;
* `done` is low, so detection stays off.

Run the calibration under the same supply noise the sensor will see in
service, so that the window includes that noise.

## Telling the processor: `nmi_unit`

In response to a violation, the core drops what it is doing and runs a
*sanity check*: a software routine that exercises the multiplier, adder,
shifter and logic units. It then reports which unit fails. The request
therefore arrives as a non-maskable interrupt with the highest priority.

`nmi_unit` is the part of the core's trap and CSR logic that handles it. It
uses the RISC-V resumable-NMI CSR numbers:

| CSR | address | content |
|---|---|---|
| `mnscratch` | 0x740 | scratch for the handler |
| `mnepc` | 0x741 | PC to resume (bit 0 forced to 0) |
| `mncause` | 0x742 | `NMI_CAUSE`, default 0x8000_0000 |
| `mnstatus` | 0x744 | bit 3 = NMIE, NMIs enabled |

The NMI is taken in the cycle where `nmi_req && NMIE && can_take` holds. In
that cycle `redirect` rises with `redirect_pc = NMI_VECTOR` (default 0x100).
The core must give this redirect priority over any other trap. On the clock
edge the unit then:

* saves `pc` into `mnepc`;
* writes the cause;
* clears NMIE;
* pulses `nmi_taken`.

In the top level, `nmi_taken` is held as a level until the request drops. It
is synchronized into the sample domain and clears the controller's `nmi_req`.

While the handler runs, further disturbances keep the request pending, but
NMIE masks them. `mnret` redirects to `mnepc` and sets NMIE again. A request
left pending is then taken at once, so the handler sees every burst without
nesting. NMIE is 1 out of reset, which means the monitor is armed from the
first instruction.

## Reporting to the housekeeping controller: `tdc_readback`

A second UART streams the sensor state. The first UART in the reference system
talks to the running program and is not part of this RTL. The line format is
8N1. At the default of 3472 sample clocks per bit this is 115200 baud from
400 MHz.

Frames follow each other back to back:

```
0xA5,  {seen0, 7'd0}, min_hw0,  {seen1, 7'd1}, min_hw1
```

* `seen` means that the sensor violated its window at least once since the
  previous frame.
* `min_hw` is the lowest weight over the same interval.

Weights never exceed 128 (0x80), and tag bytes stay below 0xA5, so 0xA5 marks
the start of a frame without ambiguity. A frame is latched in the cycle where
`report_take` pulses, and the controller restarts its tracking in that same
cycle.

`fault_tags` is also available in parallel as a sticky bit vector. The
housekeeping controller combines the tags with the sanity-check result to
choose a response:

* recompile the program so that it avoids the broken unit (for example,
  multiply by shift-and-add, add with XOR/AND carry loops, or AND via De
  Morgan with OR and XOR −1);
* or re-place the core by partial reconfiguration.

## Clocks, resets and the top level

`fault_monitor_top` has two clock domains:

* `tdc_clk` clocks the sensors, calibrator, controller and readback. It should
  run faster than the core; the testbenches use 400 MHz.
* `core_clk` clocks `nmi_unit`. The reference core runs at 200 MHz.

Only single-bit levels cross between the domains, in both directions, each
through `sync_2ff`.

Both resets are active low. They assert asynchronously and must be released
synchronously to their own clock; this RTL contains no reset synchronizer.

`skew_ps` is an input of the top level only because the sensors are models.
In a real chip the disturbance is physical.

| Parameter | Default | Meaning |
|---|---|---|
| `NUM` | 2 | sensors (one beside the ALU, one far from it) |
| `WIDTH` | 128 | taps per sensor |
| `CAL_STAGES` | 32 | calibration delay stages per sensor |
| `AVG_LOG` | 8 | log2 of the calibration averaging window |
| `MARGIN` | 4 | HW counts added to each side of the measured spread |
| `CLKS_PER_BIT` | 3472 | readback UART bit time in `tdc_clk` cycles |
| `XLEN` | 32 | core register width |
| `NMI_VECTOR` | 0x100 | sanity-check handler address |

The defaults for `NUM`, `WIDTH` and `CAL_STAGES` come from `tdc_pkg`. That
package also holds the readback sync byte and the CSR addresses, so it must be
compiled before the modules.

### Built-in assertions

The RTL includes a few concurrent assertions. Simulators that support SVA
check them during every run:

* `tdc_controller`: a sample outside the window raises the request and the
  tag of that sensor in the same cycle.
* `nmi_unit`: `nmi_taken` is followed by NMIE being clear. `mnret` may only
  be issued inside the handler, while NMIE is clear.
* `uart_tx`: the line stays high while the transmitter is idle.
* `tdc_readback`: the controller's report is taken only between frames.

## What follows the reference design and what is this design's own

Taken from the reference system:

* the sensor structure and its 128-bit width;
* two sensors, one of them beside the ALU;
* 32 calibration delay stages;
* calibration towards HW = width/2;
* comparison with a threshold derived during calibration;
* per-sensor tags;
* sampling faster than the core clock;
* a highest-priority NMI into a sanity-check routine;
* a dedicated UART for sensor readback;
* the 200 MHz core clock and the 32-bit core.

Chosen here, because the reference description does not give them:

* all delay values of the sensor model;
* the two-sided window and the extra capture rank;
* the sticky-flag and acknowledge protocol;
* calibration done in hardware rather than offline, with its averaging length
  and min/max ± 4 rule;
* the frame layout and baud rate of the readback;
* the Smrnmi-style CSRs, the vector, the cause and the reset value of NMIE;
* the two-flip-flop synchronizers.

Known departures and limits:

* The block diagram of the reference system draws three sensors: two in the
  fetch unit and one in the ALU. Its text and resource table use two, and so
  does this RTL. Set `NUM` for more.
* The resource table lists 320 registers for the two sensors; 256 of them are
  the capture flip-flops. The remaining 64 are not explained and are not
  reproduced.
* The sensor model is not synthesizable. A real implementation needs the
  FPGA's carry primitives, placement constraints and an IDELAY-type element.
  The rest of the RTL is synthesizable.
* The HW popcount of 128 bits is done in one sample cycle. At high sample
  rates a real implementation may need to pipeline it.

## Simulating

Every file starts with a `timescale`. `tdc_sensor.sv` uses 1 ps units and the
rest use 1 ns. Testbenches need Verilator's timing support:

```
verilator --binary --timing -Wno-fatal --top tb_fault_monitor_top \
    -y rtl rtl/tdc_pkg.sv tb/tb_fault_monitor_top.sv
./obj_dir/Vtb_fault_monitor_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_tdc_sensor` | model output against the closed-form tap equation over calibration settings and disturbances |
| `tb_tdc_controller` | 3000 random cycles against a `$countones` reference model; 2-cycle request latency |
| `tb_tdc_calibrator` | chosen settings, tie rule, thresholds with clamping, duration |
| `tb_tdc_readback` | frames decoded by an independent UART receiver |
| `tb_nmi_unit` | take/mask/return and CSR behaviour against a reference model |
| `tb_fault_monitor_top` | end to end with reduced UART and calibration sizes: calibration, quiet period, laser burst at sensor 0, NMI and handler, masking, pending re-take after `mnret`, UART frames, tag clearing, no detection during recalibration; each mechanism is counted |
| `tb_radiation_sensing` | a 450-sample normal trace with no alarm, then 1500 samples with 30 dips at sensor 0: every dip of 100 ps or more is caught, none of 20 ps or less, sensor 1 stays silent |
| `tb_fault_monitor_full` | one detect-and-respond operation with all defaults, including the first readback byte at 115200 baud; about 90 s of simulation time |

The sensor models make simulation slow, since every tap edge is an event. The
reduced testbenches run in 10–30 s each.
