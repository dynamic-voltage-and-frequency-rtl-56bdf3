// vsel_pullup: the four pull-up resistors on the regulator's voltage select
// pins (FBTC).
//
// The MCU drives the VSEL pins only once its startup code has run. Until then
// (mcu_vsel_oe low) the pull-ups make the pins read all ones, which on a
// TPS62740-type regulator selects its highest output, 3.3 V, the supply of the
// 16 MHz window. Once the MCU drives the pins, its value passes through. The
// pull-ups follow the paper; representing the tri-stated pins by a value and
// an output enable is this model's choice.
//
// Interface: mcu_vsel, mcu_vsel_oe in; vsel out. Combinational.
module vsel_pullup #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] mcu_vsel,
  input  logic         mcu_vsel_oe,
  output logic [W-1:0] vsel
);

  assign vsel = mcu_vsel_oe ? mcu_vsel : '1;

endmodule
