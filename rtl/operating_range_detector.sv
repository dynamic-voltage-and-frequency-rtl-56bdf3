// operating_range_detector: behavioural model of the FBTC Operating Range
// Detector, two voltage detectors on the capacitor voltage.
//
// above_vmin is high while V_cap is at or above the MCU minimum voltage
// VMIN_MV (1.8 V). above_von is high while V_cap is at or above the boot
// threshold V_on. The board carries four alternative V_on detectors of which
// one is fitted; von_sel picks among VON_OPTIONS_MV and is meant to be tied
// off. Only the 3.6 V option comes from the paper; the other three values
// (3.3, 2.8, 2.2 V) are this design's choice.
//
// Interface: vcap_mv, von_sel in; above_vmin, above_von out. Combinational.
module operating_range_detector
  import dvfs_pkg::*;
#(
  parameter int unsigned VMIN_MV           = 1800,
  parameter int unsigned VON_OPTIONS_MV [4] = '{3600, 3300, 2800, 2200}
) (
  input  mv_t        vcap_mv,
  input  logic [1:0] von_sel,
  output logic       above_vmin,
  output logic       above_von
);

  logic [3:0] von_hit;

  voltage_detector #(.THRESH_MV(VMIN_MV)) u_vmin (
    .vin_mv(vcap_mv),
    .above (above_vmin)
  );

  for (genvar i = 0; i < 4; i++) begin : g_von
    voltage_detector #(.THRESH_MV(VON_OPTIONS_MV[i])) u_von (
      .vin_mv(vcap_mv),
      .above (von_hit[i])
    );
  end

  assign above_von = von_hit[von_sel];

endmodule
