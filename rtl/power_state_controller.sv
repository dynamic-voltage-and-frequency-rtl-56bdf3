// power_state_controller: FBTC Power State Controller. The Operating Range
// Detector feeds the System Enable latch: the regulator is switched on when
// the capacitor voltage reaches the configurable boot threshold V_on and off
// when it falls below V_min = 1.8 V.
//
// Interface: vcap_mv, von_sel in; reg_en out. Asynchronous.
module power_state_controller
  import dvfs_pkg::*;
(
  input  mv_t        vcap_mv,
  input  logic [1:0] von_sel,
  output logic       reg_en
);

  logic above_vmin, above_von;

  operating_range_detector u_ord (
    .vcap_mv   (vcap_mv),
    .von_sel   (von_sel),
    .above_vmin(above_vmin),
    .above_von (above_von)
  );

  system_enable u_en (
    .above_vmin(above_vmin),
    .above_von (above_von),
    .reg_en    (reg_en)
  );

endmodule
