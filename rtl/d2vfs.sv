// d2vfs: controller hardware of D2VFS (Discrete Dynamic Voltage and Frequency
// Scaling), the reference design.
//
// A Window Detector turns the capacitor voltage into a thermometer code of
// the performance window it lies in; the Interrupt Driver raises irq whenever
// that code differs from the stored Current Window Setting. The MCU, on the
// interrupt, reads det, decides the new frequency and regulator voltage in
// software (deferring upward moves by one window to avoid bouncing), and
// pulses store_req so that the setting follows the detector code. The MCU and
// the regulator are outside this module.
//
// Interface: vcap_mv in; clr_n power-on clear; store_req from the MCU;
// irq, det, setting, up, down to the MCU. Asynchronous, no clock.
module d2vfs
  import dvfs_pkg::*;
(
  input  mv_t     vcap_mv,
  input  logic    clr_n,
  input  logic    store_req,
  output logic    irq,
  output logic    up,
  output logic    down,
  output thermo_t det,
  output thermo_t setting
);

  window_detector u_wdet (
    .vcap_mv(vcap_mv),
    .det    (det)
  );

  d2vfs_interrupt_driver u_irq (
    .clr_n    (clr_n),
    .det      (det),
    .store_req(store_req),
    .irq      (irq),
    .up       (up),
    .down     (down),
    .setting  (setting)
  );

endmodule
