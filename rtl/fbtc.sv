// fbtc: controller hardware of FBTC (Fixed Boot Threshold Controller).
//
// The Power State Controller switches the regulator on when the capacitor
// voltage reaches the boot threshold V_on (selected by von_sel) and off below
// V_min = 1.8 V. The Changepoint Detector compares divided copies of V_cap
// with the regulator output and raises discharge_irq (move one window down) or
// charge_irq (move one window up). The pull-ups on VSEL start the regulator at
// 3.3 V before the MCU takes over. The MCU keeps track of the current window
// and masks the discharge interrupt while in the lowest window; both are
// software and outside this module, as is the regulator itself.
//
// Interface: vcap_mv, vreg_mv (analog nodes as millivolt codes), von_sel
// (tie-off), mcu_vsel/mcu_vsel_oe from the MCU; reg_en and vsel to the
// regulator; charge_irq, discharge_irq to the MCU. Asynchronous, no clock.
module fbtc
  import dvfs_pkg::*;
(
  input  mv_t        vcap_mv,
  input  mv_t        vreg_mv,
  input  logic [1:0] von_sel,
  input  vsel_t      mcu_vsel,
  input  logic       mcu_vsel_oe,
  output logic       reg_en,
  output vsel_t      vsel,
  output mv_t        vref_charge_mv,
  output mv_t        vref_discharge_mv,
  output logic       charge_irq,
  output logic       discharge_irq
);

  power_state_controller u_psc (
    .vcap_mv(vcap_mv),
    .von_sel(von_sel),
    .reg_en (reg_en)
  );

  changepoint_detector u_cpd (
    .vcap_mv          (vcap_mv),
    .vreg_mv          (vreg_mv),
    .vref_discharge_mv(vref_discharge_mv),
    .vref_charge_mv   (vref_charge_mv),
    .discharge        (discharge_irq),
    .charge           (charge_irq)
  );

  vsel_pullup #(.W(VSEL_W)) u_pu (
    .mcu_vsel   (mcu_vsel),
    .mcu_vsel_oe(mcu_vsel_oe),
    .vsel       (vsel)
  );

endmodule
