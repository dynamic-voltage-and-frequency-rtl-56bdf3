// window_detector: behavioural model of the D2VFS Window Detector, four
// voltage detectors on the capacitor voltage, one per performance window.
//
// Detector i trips at the lower bound of window i (1.8, 2.2, 2.8 and 3.3 V),
// so the 4-bit output is a thermometer code: 0000 below 1.8 V, 0001 in the
// 1 MHz window, 0011 in the 8 MHz window, 0111 in the 12 MHz window and 1111
// in the 16 MHz window. One detector per window follows the paper; the bit
// order (bit 0 = lowest threshold) is this design's choice.
//
// Interface: vcap_mv in, det out. Combinational, no delay.
module window_detector
  import dvfs_pkg::*;
#(
  parameter int unsigned THRESH_MV [N_WIN] = WIN_VMIN_MV
) (
  input  mv_t     vcap_mv,
  output thermo_t det
);

  for (genvar i = 0; i < N_WIN; i++) begin : g_det
    voltage_detector #(.THRESH_MV(THRESH_MV[i])) u_det (
      .vin_mv(vcap_mv),
      .above (det[i])
    );
  end

endmodule
