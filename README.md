# Equipment protection logic for a two-cavity accumulator-ring RF plant

An accumulator ring for a synchrotron light source has two 500 MHz
normal-conducting cavities. A 60 kW solid-state amplifier (HPA) drives each
one. The amplifier in turn is driven by a low-level RF (LLRF) controller.
An arc in a circulator, a reflected-power excursion, a vacuum burst or a
cooling failure can damage these components within microseconds to
milliseconds. The equipment protection system (EPS) exists to remove the RF
drive before that happens.

The design is layered by speed. Each layer can cut the RF on its own:

| layer | who decides | acts on | requirement |
|---|---|---|---|
| primary mitigation | RF Drive Control Chassis hardware logic | PIN diode (800 ns) and coaxial switch (20 ms) in the drive cable | - |
| fast interlocks | LLRF controller, digital chassis | its permit to the drive chassis and to the master interlock | 6 µs |
| slow interlocks | master interlock controller (a PLC in the real plant) | permits to LLRF, HPA and drive chassis | 10 ms |
| machine protection | external MPS | redundant permit pair to drive chassis and master interlock | 20 ms |
| amplifier self-protection | HPA's own controllers (outside this RTL) | the HPA | 10 µs / 800 ms |

This RTL models the decision logic of that system in SystemVerilog. The
mitigation devices are clocked behavioural models. The whole two-cavity
system can be simulated end to end.

## The RF drive path and the permit map

For each cavity the drive signal passes through the following chain. RF is
carried as one "RF present" bit at every point.

```
 LLRF digital chassis --> RF Drive Control Chassis --> PPS Interlock Interface --> HPA
   (llrf_interlock)         PIN diode -> coax switch      chain A -> chain B
                              ^      ^
                              |      |  rf_drive_permit
                         rf_drive_control  (published gate logic)   
                        ^    ^     ^      ^
        llrf_permit ----+    |     |      +---- RF test mode (pps_mode_select)
  master drive permit -------+     +----------- MPS permit A, MPS permit B
```

The permits form a loop:

* The LLRF permit goes to the drive chassis and to the master interlock.
* The master interlock sends three permits per cavity:
  * `llrf_slow_pmt` to the LLRF;
  * `hpa_pmt` to the amplifier;
  * `rf_drive_pmt` to the drive chassis.
* The LLRF sends an Oscillation Permit directly to the amplifier.
* The amplifier reports a fault back to the master interlock.

The loop can start from reset only because the LLRF permit does **not**
depend on the master-interlock permit. The LLRF uses the master permit only
to enable its own drive output. If both permits depended on each other,
neither could ever rise.

All permits are active high, so a broken cable or an unpowered chassis
inhibits RF.

## RF Drive Control Chassis logic (`rf_drive_control`)

This is the one part of the system whose logic is known at gate level. It
has two AND gates and an OR gate:

```
rf_drive_permit = llrf_permit & mi_plc_permit & (rf_test_mode | (mps_permit_a & mps_permit_b))
```

The same permit closes both the PIN diode and the coaxial switch. The two
devices sit in series, so RF is gone as soon as the faster one opens, which
is the PIN diode after 800 ns. The coaxial switch follows 20 ms later and
gives a second, mechanical break. A short permit dip does not move the
coaxial switch at all.

In the three RF test modes, the MPS pair is bypassed. This lets the RF be
commissioned while the rest of the accelerator is not yet permitting beam.
The block also reports `mps_bypassed`, which is set while the permit stands
only because of that bypass. The block is purely combinational, as the
original hardware logic is.

Only five input words grant RF. The words are {A, B, test, LLRF, master}:

| MPS A | MPS B | test mode | LLRF | master | permit |
|---|---|---|---|---|---|
| 1 | 1 | x | 1 | 1 | 1 |
| x | x | 1 | 1 | 1 | 1 (bypassed if A & B = 0) |
| any other combination | | | | | 0 |

## Operating modes (`pps_mode_select`)

A safety key switch in the PPS chassis selects one of four modes. The
encoding follows the key position: 0 Operational, 1 RF Test, 2 RF Test with
Access, 3 RF Test to Dummy Load.

The decoder expects exactly one closed contact. No contact (key between
positions) or several contacts gives `mode_valid = 0`, reads as Operational,
and never asserts `rf_test_mode`. An unclear switch therefore cannot bypass
the MPS. The master interlock also trips on it.

## LLRF fast interlock (`llrf_interlock`)

Each LLRF digital chassis watches three arc detectors: circulator,
circulator load and a spare. It also watches `N_PWR` RF power readings
(default 8) against per-channel thresholds. Thresholds are inputs, because
the real controller receives them as configuration over its serial link.

The pipeline has three stages:

1. A two-flop synchronizer for the arc contacts and the master permit.
2. One registered compare stage:
   * `power > limit` for each channel;
   * `|cavity power - drive power| > osc_limit` for the discrepancy.
3. A latch per fault. A latch clears only on `ilk_reset`, and only when its
   cause has gone.

| event | permit drops after | at 100 MHz |
|---|---|---|
| power above threshold | 2 clock edges | 20 ns |
| cavity/drive discrepancy (Oscillation Permit) | 2 clock edges | 20 ns |
| arc detector | 3 clock edges | 30 ns |

A reading exactly at the threshold does not trip. A discrepancy fault drops
only the Oscillation Permit to the amplifier. It does not touch the LLRF
permit.

## Master interlock (`master_interlock`)

In the plant this is PLC code, which is not published. The module gives the
same kind of decision as clocked logic and mimics a PLC task.

Inputs pass a two-flop synchronizer. Once per scan (`SCAN_US`, default
1 ms), the module evaluates the interlocks and writes all outputs. Operator
command pulses (TX ON, TX OFF, RESET) are held until the next scan, so a
one-cycle pulse is never lost.

Each cavity has ten slow interlocks. They are reported in `ilk_latched`, a
packed `mi_ilk_t` listed here from MSB to LSB:

| bit | name | trips when |
|---|---|---|
| 9 | `pps` | PPS status does not permit RF (shared) |
| 8 | `mps` | MPS A or B lost, outside the RF test modes (shared) |
| 7 | `mode` | key switch reading invalid (shared) |
| 6 | `vacuum` | cavity vacuum not OK |
| 5 | `feeder` | feeder interlock |
| 4 | `rf_switch` | high-power RF switch interlock |
| 3 | `cavity` | cavity temperature/flow |
| 2 | `tuner` | tuner |
| 1 | `hpa` | HPA reports a fault |
| 0 | `llrf` | LLRF fast permit lost |

The rules are:

* An interlock latches when it trips. RESET clears it only once its cause
  has gone.
* TX ON starts transmit only when no interlock is latched. TX OFF, or any
  interlock, ends it.
* `hpa_pmt` is set when no interlock is latched.
* `rf_drive_pmt` and `llrf_slow_pmt` are set when no interlock is latched
  and transmit is on. So TX OFF removes the drive but keeps the amplifier
  permitted.
* The MPS interlock is masked in the RF test modes. Without this mask, the
  master's drive permit would cancel the bypass in the chassis hardware.

An input change reaches the permits within one scan plus two clock cycles.
At the defaults that is 1 ms + 20 ns, against a 10 ms requirement.

## Switch models (`pin_diode_model`, `coax_switch_model`)

These two modules are behavioural models of analog and electromechanical
parts, not logic meant for hardware. The switch state follows the control
once the control has held its new value for the switching time, rounded up
to whole clock cycles:

* PIN diode: 80 cycles (800 ns).
* Coaxial switch: 2,000,000 cycles (20 ms).

A shorter pulse restarts the count. Four coaxial switch instances are used
per cavity: one in the drive chassis, plus the PPS chain A and chain B
switches. The switching time of the chain switches is not published. They
reuse the 20 ms of the drive-chassis switch.

## End-to-end response times

These times are measured in the top-level test at the default parameters.
A cut counts as complete when RF is gone at the HPA input.

| cause | measured | requirement |
|---|---|---|
| MPS permit lost | 80 cycles = 800 ns | 20 ms |
| LLRF power fault | 82 cycles = 820 ns | 6 µs |
| LLRF arc | 83 cycles = 830 ns | 6 µs |
| slow interlock (vacuum, HPA fault) | ≤ 1 scan + 83 cycles ≈ 1 ms | 10 ms |
| PPS chain switch opened | 2,000,000 cycles = 20 ms | - |
| start-up, TX ON to RF at HPA | ≤ 1 scan + 20 ms | - |

The "requirement" column states what the system must achieve from fault to
RF off, including detection. These models include only the logic delays
and the switching times. Sensor and cable delays are not modelled.

## What comes from the published system and what is this design's own

These points are taken from the published system description:

* The two-cavity structure.
* The gate logic of the drive chassis, including the MPS bypass in test
  modes.
* The 800 ns and 20 ms switching times and the series order of the
  switches in the drive path.
* The four operating modes.
* The three arc detectors.
* The permit/status connections between LLRF, master interlock, HPA, MPS,
  PPS and vacuum.
* The response-time requirements.
* The names of the slow interlocks and operator commands (from the operator
  display).

These are this design's own choices, where the published description is
silent:

* The 100 MHz clock.
* 16-bit power readings and 8 power channels per LLRF.
* Active-high permit polarity.
* Fault latching and the reset rule.
* The 1 ms scan.
* The transmit on/off rules and which permit depends on what.
* The master interlock masking MPS in test modes.
* Key-switch wiring and validation.
* Thresholds and the discrepancy limit supplied as inputs.
* The LLRF drive being gated by the master permit only.
* One RESET per cavity serving both the LLRF and the master interlock.
* Synchronizer depths.

These are known departures and omissions:

* The master interlock is a simplification of PLC software that is not
  published. The operator display also shows OFF/STANDBY states and the
  status items "A-LLRF Fast Pmt", "HPA DC/RF" and "ARRF OK", whose meaning
  is not given. None of these is modelled.
* The RF switch routing to the dummy load in "RF Test to Dummy Load" is not
  checked against the mode.
* The RS-485 status/configuration link, the HMI and the EPICS control layer
  are not modelled.
* The amplifier's own protection system (a PLC plus many FPGAs), the MPS,
  the PPS, the vacuum controllers, the remote I/O and all RF hardware are
  outside the RTL. Their signals are top-level ports.

## Files

| file | contents |
|---|---|
| `rtl/eps_pkg.sv` | shared constants (cavity count, switching times, response requirements), `rf_mode_e`, `mi_ilk_t`, `ns_to_cycles()` |
| `rtl/rf_drive_control.sv` | drive-chassis permit logic |
| `rtl/pps_mode_select.sv` | key-switch mode decoder |
| `rtl/llrf_interlock.sv` | LLRF fast interlock |
| `rtl/master_interlock.sv` | slow interlock, transmit control and permits |
| `rtl/pin_diode_model.sv`, `rtl/coax_switch_model.sv` | behavioural switch models |
| `rtl/ar_rf_eps.sv` | top: two cavities wired together |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

The top `ar_rf_eps` has these parameters: `N_CAV_P` (2), `CLK_HZ`,
`N_PWR`, `PWR_W`, `SCAN_US`, `PIN_NS` and `COAX_NS`. The switch models
derive their cycle counts from `CLK_HZ`, so the same timing holds at any
clock.

## Simulating

Every testbench prints one line, `TB_RESULT checks=N failures=M`, and
stops by itself. A watchdog ends a run that hangs. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/eps_pkg.sv tb/tb_ar_rf_eps.sv --top-module tb_ar_rf_eps
./obj_dir/Vtb_ar_rf_eps
```

`tb_ar_rf_eps` runs the whole system at its default parameters, about
0.1 s of simulated time, in a few seconds. It does the following:

* Brings both cavities up.
* Makes each mechanism act at least once, and prints how often each
  happened:
  * MPS trip;
  * MPS bypass in test mode;
  * arc, power and oscillation trips;
  * slow (vacuum) trip;
  * HPA fault;
  * TX OFF;
  * PPS chain opening;
  * invalid key switch.
* Recovers after each one with RESET and TX ON.
* Checks the latencies in the table above to the cycle.

The module testbenches test their blocks as follows:

* `rf_drive_control` and `pps_mode_select`: exhaustively.
* The switch models: at the full switching times.
* `llrf_interlock`: all channels and detectors, plus 300 random threshold
  patterns.
* `master_interlock`: every interlock on both cavities, at the default 1 ms
  scan.
