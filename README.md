# Voltage and frequency scaling driven by the energy buffer

A battery-less sensor node runs from a small capacitor that an energy harvester
charges. When the capacitor voltage `V_cap` is high, the MCU can run at its top
clock. As `V_cap` falls, a fixed fast clock stops the MCU early, because a fast
clock needs a high supply. A fixed slow clock can run down to a low voltage,
but it wastes energy per cycle while the buffer is full. The remedy is to treat
the MCU's calibrated operating points as **performance windows**. Each window is
a clock frequency run at the lowest supply that frequency allows. The MCU then
follows `V_cap` from window to window: the clock is lowered before the supply
when `V_cap` falls, and the supply is raised before the clock when it rises.

For an MSP430-G2553-class MCU the four windows are:

| window | clock  | regulated supply (= lower bound of the window) | `V_cap` range  |
|-------:|-------:|-----------------------------------------------:|----------------|
| 0      | 1 MHz  | 1.8 V                                          | 1.8 – 2.2 V    |
| 1      | 8 MHz  | 2.2 V                                          | 2.2 – 2.8 V    |
| 2      | 12 MHz | 2.8 V                                          | 2.8 – 3.3 V    |
| 3      | 16 MHz | 3.3 V                                          | 3.3 – 3.6 V    |

The supply comes from a buck regulator (TPS62740 type) with four voltage-select
pins (`VSEL`). The clock is set by MCU software. The RTL here is the small
amount of hardware that tells the MCU *when* to change window. It follows the
two controllers described in "Dynamic Voltage and Frequency Scaling for
Intermittent Computing" (Maioli et al.):

* **D2VFS**, the reference design. It has one voltage detector per window and
  a register holding the window last acknowledged. It raises an interrupt
  whenever the detectors disagree with that register.
* **FBTC** (Fixed Boot Threshold Controller). It keeps no window state in
  hardware. It has a set-reset power switch with a selectable boot threshold,
  and two divider comparators. They signal "move one window down" and "move one
  window up" by comparing divided copies of `V_cap` with the regulator output.

Both are board-level designs built from discrete logic and analog comparators.
In this RTL the logic is written as synthesizable SystemVerilog. The analog
parts are behavioural models acting on millivolt codes.

## How analog nodes are represented

Every voltage (`V_cap`, `V_reg`, the divider taps) is an unsigned 13-bit
millivolt code, `dvfs_pkg::mv_t` (0 – 8191 mV). A voltage detector becomes
`vin_mv >= THRESH_MV`. A divider and op-amp comparator becomes integer
arithmetic on the code. This is exact enough to reproduce the switching points
to 1 mV. It does not model comparator offset, hysteresis, propagation delay
or quiescent current, none of which the original design specifies. The
files that are behavioural models of analog parts say so in their header:
`voltage_detector`, `window_detector`, `operating_range_detector` and
`changepoint_detector`. Their code still synthesizes, for example for use
behind an ADC.

Neither controller has a clock. D2VFS has one register, clocked by its own store
strobe. FBTC has one set-reset latch. Everything else is combinational.

## D2VFS

```
 V_cap ─► window_detector ──det[3:0]──┬──────────────────────────────► to MCU (read on interrupt)
          (4 detectors:               │
           1.8/2.2/2.8/3.3 V)         ▼
                             window_comparator (4-bit magnitude)
                               a=det, b=setting ──► eq ──► irq = !eq ──► MCU interrupt
                                                    gt/lt ► up / down
                             window_setting_reg (quad D flip-flop)
                               clk = irq & store_req  (Store Current Window AND gate)
                               d = det, q = setting
```

`det` is a thermometer code: `0000` below 1.8 V, then `0001`, `0011`, `0111`
and `1111`. A thermometer code is ordered like a number, so the magnitude
comparator also gives the direction of the change (`up`/`down`).

**Protocol.** After power-up, `clr_n` clears `setting` to `0000`. If `V_cap`
is already above 1.8 V, `irq` is high at once. On an interrupt, the MCU driver
reads `det` and picks its new window. It then pulses `store_req`. That strobe
passes the AND gate only while `irq` is high. Its rising edge copies `det`
into `setting`, the codes match again, and `irq` falls. The fall also ends the
clock pulse. A `store_req` with no pending change does nothing. Which signals
feed the AND gate is this design's choice: the source names only the gate and
its role.

**Deferral (software).** On an upward change the D2VFS driver moves only to
the window *below* the detected one. Rising from 1.8 V, the interrupt at
2.2 V is acknowledged but changes nothing. The interrupt at 2.8 V moves the MCU
to 8 MHz / 2.2 V, and so on. A window is therefore entered only once `V_cap`
has reached its upper bound. This avoids an up–down livelock when the faster
window drains the capacitor more quickly than it charges. The register must
still be updated on every interrupt, or no new interrupt could follow. This
policy lives in the MCU and appears here only in the testbench driver model.

## FBTC

```
 V_cap ─► operating_range_detector ─ above_vmin (1.8 V) ─► NOT ─► R ┐
          von_sel ─► above_von (V_on: 3.6/3.3/2.8/2.2 V) ─────► S ┴► system_enable ─► reg_en
 V_cap, V_reg ─► changepoint_detector ─► discharge_irq, charge_irq ─► MCU
 MCU VSEL (tri-stated during startup) ─► vsel_pullup ─► VSEL (1111 = 3.3 V until driven)
```

**Power state controller.** `system_enable` is the set-reset latch of the
original, built from two cross-coupled NOR gates. Set is "`V_cap` ≥ `V_on`",
reset is "`V_cap` < 1.8 V". So the regulator switches on at the boot threshold
and stays on all the way down to 1.8 V. The board carries four alternative
`V_on` detectors, and `von_sel` picks one. Only 3.6 V is a published value; the
other three in `VON_OPTIONS_MV` are placeholders. The latch is written with
`always_latch`. If both inputs are active, which cannot happen while
`V_on` > `V_min`, the output is low, as the Q output of a NOR latch is.

**VSEL pull-ups.** The MCU cannot drive the regulator's select pins until its
startup code has run. Four pull-ups make the regulator start at its highest
setting meanwhile. That setting is 3.3 V, the supply of the 16 MHz window
FBTC boots into.

**Changepoint detectors.** These are the core of FBTC and the part that needs
most care:

```
V_ref_discharge = R2/(R1+R2) · V_cap = δd · V_cap     discharge = V_reg > V_ref_discharge
V_ref_charge    = R4/(R3+R4) · V_cap = δc · V_cap     charge    = V_ref_charge > V_reg
```

In window *i* the regulator holds `V_reg = Vmin[i]`. The discharge detector
fires when `V_cap < Vmin[i]/δd`, i.e. just above the window's lower bound. The
MCU has to move down before `V_cap` reaches the bound itself. The charge
detector fires when `V_cap > Vmin[i]/δc`. The MCU counts windows itself and
moves exactly one window per interrupt. It masks the discharge interrupt in
window 0, where that interrupt stays asserted all the way down to switch-off.

The default resistors are the published ones: R1 = 150 kΩ, R2 = 10 MΩ
(δd = 200/203 ≈ 0.985) and R3 = 2 MΩ, R4 = 8 MΩ (δc = 0.8). They give these
switching points:

| from window | `V_reg` | moves down below | moves up above |
|------------:|--------:|-----------------:|---------------:|
| 3 (16 MHz)  | 3.3 V   | 3.35 V           | –              |
| 2 (12 MHz)  | 2.8 V   | 2.842 V          | 3.5 V          |
| 1 (8 MHz)   | 2.2 V   | 2.233 V          | 2.75 V         |
| 0 (1 MHz)   | 1.8 V   | (masked)         | 2.25 V         |

**Choosing the margins.** δd sets how far above a window's lower bound the
down-switch happens. δd ≥ Vmin[i+1]/(Vmin[i+1] + ε) must hold at every
boundary. With ε = 50 mV the largest bound comes from the 3.3 V window:
3.3/3.35 = 0.985. The margin has to buy enough cycles in the upper window to
repay a switch. A switch costs 18 cycles of driver code, and moving up saves
about 17 % per cycle. That asks for at least 106 cycles, i.e. ½·C·ε² ≥
106 · 0.85 nJ. With C = 100 µF this gives ε ≥ 42 mV, so the 50 mV used above
is enough.

**A consequence of the published values.** Take the MCU moving down from
12 MHz to 8 MHz at about 2.84 V. In the 8 MHz window the charge detector fires
above 2.75 V, so it is already active, and the MCU moves straight back up.
While `V_cap` falls from about 2.84 V to 2.75 V, the controller bounces between
the 8 and 12 MHz windows. The same band appears on the way up: at 2.75 V the
MCU is sent to the 2.8 V window, which the capacitor cannot yet supply. The
anti-bounce condition requires δc · `V_cap` ≤ `Vmin[i]` at every down-switch
point. That needs δc ≤ 2.2/2.85 ≈ 0.77. The value 0.8 satisfies it only for
the lowest window boundary. The RTL keeps the published values as defaults;
`R3_OHM`/`R4_OHM` are parameters. `tb_fbtc` and `tb_dvfs_top` check that the
bounce happens only in this band. The other boundaries are bounce-free with
these values.

## Module hierarchy

```
dvfs_top                      both controllers on one V_cap input
├── d2vfs
│   ├── window_detector       4 × voltage_detector
│   └── d2vfs_interrupt_driver
│       ├── window_comparator
│       └── window_setting_reg
└── fbtc
    ├── power_state_controller
    │   ├── operating_range_detector   5 × voltage_detector (V_min + 4 V_on options)
    │   └── system_enable
    ├── changepoint_detector
    └── vsel_pullup
dvfs_pkg                      mv_t, window table, VSEL encoding
```

`dvfs_top` places the two alternative controllers side by side. They share
only the `V_cap` input. Each has its own pins (`d2_*`, `fb_*`) towards its MCU
and regulator. The MCU, regulator, capacitor and harvester are not part of
the RTL.

## Simulating

Every testbench in `tb/` prints `TB_RESULT checks=N failures=M` and stops
itself. They need Verilator 5 with timing support:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dvfs_pkg.sv tb/tb_dvfs_top.sv --top-module tb_dvfs_top
./obj_dir/Vtb_dvfs_top
```

Substitute any other testbench name. There is one testbench per module
(`tb_<module>`), plus:

* `tb_dvfs_top` runs both controllers end to end at default parameters. The
  MCU driver policies and a regulator stand-in are written into the testbench.
  The `V_cap` profile charges, discharges, recharges, browns out and reboots
  with the 2.8 V boot detector. The test counts every mechanism: the D2VFS boot
  interrupt, downward, deferred and applied upward interrupts, and brown-out;
  the FBTC power-on and off, pull-up start, charge and discharge interrupts,
  masking and the alternative `V_on`. It also asserts throughout that the
  clock never runs faster than the selected supply allows.
* `tb_single_discharge` discharges a 100 µF capacitor once from 3.6 V and
  counts MCU cycles. It uses an energy model of its own: energy per cycle
  scales with V² from 0.85 nJ at 16 MHz/3.3 V, and the regulator is 90 %
  efficient. Typical output: static 16 MHz ≈ 111 k cycles, static 1 MHz
  ≈ 888 k, FBTC ≈ 1.00 M, D2VFS ≈ 0.98 M. The model ignores the frequency
  dependence of the MCU's efficiency and the controllers' quiescent current.
  So only the ordering is checked, not absolute numbers.
* `tb_energy_poor` runs both controllers through five energy cycles. Each has
  its own 80 µF capacitor, charged by a 5 V source that delivers only while
  the device is off: 200 ms bursts every second through 1 kΩ, both assumed
  here. Every cycle must boot at 3.6 V, walk down through all four windows and
  brown out. Each burst must give exactly one cycle.

## Where this RTL departs from, or adds to, the original description

* Voltages are millivolt codes and the analog parts are ideal (see above).
* D2VFS: the store gate's inputs (`irq`, `store_req`), `irq` as the inverse of
  the comparator's equal output, and a clear value of `0000` are choices made
  here.
* FBTC: the `V_on` options other than 3.6 V, and the VSEL encoding (taken from
  the regulator's datasheet), are choices made here.
* The original text gives two orders for a downward change. The rationale says
  frequency first, then voltage, as the only safe order. The D2VFS walkthrough
  says voltage first. The driver models use frequency first. This affects only
  software.
* The published charge divider leaves the 2.75 – 2.84 V bounce band described
  above. It is kept, not corrected.
* Interrupt masking, window bookkeeping and the D2VFS deferral are MCU
  software. They appear only in testbench models, not in `rtl/`.
