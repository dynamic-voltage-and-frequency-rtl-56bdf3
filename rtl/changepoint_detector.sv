// changepoint_detector: behavioural model of the FBTC Changepoint Detector,
// i.e. the Charge and Discharge Detectors (analog on the board).
//
// Each detector is a resistor divider on the capacitor voltage and an
// operational amplifier used as a comparator against the regulator output:
//   V_ref_discharge = R2/(R1+R2) * V_cap,  discharge = (V_reg > V_ref_discharge)
//   V_ref_charge    = R4/(R3+R4) * V_cap,  charge    = (V_ref_charge > V_reg)
// The discharge detector fires when V_cap has fallen to within a small margin
// of the regulated voltage, i.e. near the lower end of the present window; the
// charge detector fires when V_cap has risen far enough above V_reg that the
// next window up can be sustained. Neither tracks which window is current: the
// MCU does, and moves one window down or up per interrupt.
//
// The equations and the resistor values (150 k / 10 M and 2 M / 8 M) follow
// the paper. Truncating the divider output to whole millivolts and an ideal
// comparator (no offset, no hysteresis) are this model's choices.
//
// Interface: vcap_mv, vreg_mv in; the two divider voltages and the two
// detector outputs out. Combinational.
module changepoint_detector
  import dvfs_pkg::*;
#(
  parameter longint unsigned R1_OHM = 150_000,
  parameter longint unsigned R2_OHM = 10_000_000,
  parameter longint unsigned R3_OHM = 2_000_000,
  parameter longint unsigned R4_OHM = 8_000_000
) (
  input  mv_t  vcap_mv,
  input  mv_t  vreg_mv,
  output mv_t  vref_discharge_mv,
  output mv_t  vref_charge_mv,
  output logic discharge,
  output logic charge
);

  always_comb begin
    vref_discharge_mv = mv_t'((64'(vcap_mv) * R2_OHM) / (R1_OHM + R2_OHM));
    vref_charge_mv    = mv_t'((64'(vcap_mv) * R4_OHM) / (R3_OHM + R4_OHM));
    discharge         = (vreg_mv > vref_discharge_mv);
    charge            = (vref_charge_mv > vreg_mv);
  end

endmodule
