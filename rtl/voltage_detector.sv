// voltage_detector: behavioural model of one fixed-threshold supply voltage
// detector (a BU49xxG-type part; analog on the board).
//
// The output is high while the sensed voltage is at or above THRESH_MV and low
// below it. Both controllers use these detectors: D2VFS has one per window
// lower bound, FBTC one at the MCU's minimum voltage and one at the boot
// threshold. The model has no hysteresis and no delay; both are choices of
// this model, as is the use of a millivolt code for the analog input. The
// code is synthesizable, but it stands for an analog comparator.
//
// Interface: vin_mv (millivolt code) in, above out. Purely combinational.
module voltage_detector
  import dvfs_pkg::*;
#(
  parameter int unsigned THRESH_MV = 1800
) (
  input  mv_t  vin_mv,
  output logic above
);

  assign above = (int'(vin_mv) >= int'(THRESH_MV));

endmodule
