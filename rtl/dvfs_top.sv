// dvfs_top: the two capacitor-driven voltage/frequency scaling controllers,
// D2VFS and FBTC, side by side on one capacitor-voltage input.
//
// The two are alternative boards; they share nothing but the V_cap sense
// input here, and each has its own MCU-side and regulator-side pins (prefixes
// d2_ and fb_). The MCU, the regulators and the capacitor are outside: the
// regulator outputs come back in as fb_vreg_mv (FBTC compares against it;
// D2VFS does not use it).
//
// Interface, all asynchronous (there is no clock in either controller):
//   vcap_mv          capacitor voltage, millivolt code
//   d2_*             D2VFS: power-on clear, store strobe in; interrupt,
//                    direction, detector lines and stored setting out
//   fb_*             FBTC: regulator output and V_on selection in, MCU VSEL
//                    drive in; regulator enable, VSEL, divider voltages and
//                    both interrupts out
module dvfs_top
  import dvfs_pkg::*;
(
  input  mv_t        vcap_mv,
  // D2VFS
  input  logic       d2_clr_n,
  input  logic       d2_store_req,
  output logic       d2_irq,
  output logic       d2_up,
  output logic       d2_down,
  output thermo_t    d2_det,
  output thermo_t    d2_setting,
  // FBTC
  input  mv_t        fb_vreg_mv,
  input  logic [1:0] fb_von_sel,
  input  vsel_t      fb_mcu_vsel,
  input  logic       fb_mcu_vsel_oe,
  output logic       fb_reg_en,
  output vsel_t      fb_vsel,
  output mv_t        fb_vref_charge_mv,
  output mv_t        fb_vref_discharge_mv,
  output logic       fb_charge_irq,
  output logic       fb_discharge_irq
);

  d2vfs u_d2vfs (
    .vcap_mv  (vcap_mv),
    .clr_n    (d2_clr_n),
    .store_req(d2_store_req),
    .irq      (d2_irq),
    .up       (d2_up),
    .down     (d2_down),
    .det      (d2_det),
    .setting  (d2_setting)
  );

  fbtc u_fbtc (
    .vcap_mv          (vcap_mv),
    .vreg_mv          (fb_vreg_mv),
    .von_sel          (fb_von_sel),
    .mcu_vsel         (fb_mcu_vsel),
    .mcu_vsel_oe      (fb_mcu_vsel_oe),
    .reg_en           (fb_reg_en),
    .vsel             (fb_vsel),
    .vref_charge_mv   (fb_vref_charge_mv),
    .vref_discharge_mv(fb_vref_discharge_mv),
    .charge_irq       (fb_charge_irq),
    .discharge_irq    (fb_discharge_irq)
  );

endmodule
