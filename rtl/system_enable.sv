// system_enable: the FBTC System Enable function, an inverter and two
// cross-coupled NOR gates working as a set-reset flip-flop.
//
// Set is the V_on detector (V_cap has reached the boot threshold); reset is
// the inverted V_min detector (V_cap has fallen below 1.8 V). The output
// reg_en switches the voltage regulator, and with it the MCU, on and off.
// Between the two thresholds the latch holds, which gives the power state its
// hysteresis: the system boots at V_on and runs down to V_min.
//
// The structure follows the paper. It is written as a level-sensitive latch
// instead of a combinational NOR loop; with set and reset both active the
// output is low, as the Q output of a NOR latch is. The latch is intended, so
// a latch warning from a tool on this module is expected.
//
// Interface: above_vmin, above_von in; reg_en out. Asynchronous.
module system_enable (
  input  logic above_vmin,
  input  logic above_von,
  output logic reg_en
);

  logic set, rst;

  assign set = above_von;
  assign rst = ~above_vmin;          // NOT gate

  always_latch begin
    if (set || rst) reg_en = set && !rst;
  end

endmodule
