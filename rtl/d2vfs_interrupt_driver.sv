// d2vfs_interrupt_driver: the D2VFS Interrupt Driver.
//
// It keeps a small memory of the performance window the MCU is configured for
// (window_setting_reg) and compares it with the live Window Detector code
// (window_comparator). While the two differ, irq is high: the capacitor
// voltage has entered another window. up/down give the direction (the 74x85
// A>B and A<B outputs). The Store Current Window function is a 2-input AND
// gate whose output clocks the setting register; here its inputs are irq and
// store_req, a strobe from the MCU. When the MCU has read the detector lines
// it pulses store_req, the new code is stored, the codes match again and irq
// drops, which also ends the AND gate's output pulse.
//
// The three parts (flip-flop, comparator, AND gate) follow the paper. Which
// signals feed the AND gate, and irq being the inverse of A=B, are choices of
// this design.
//
// Interface: clr_n clears the setting at power-on. det in, store_req in;
// irq, up, down, setting out.
// Timing: asynchronous. irq follows det combinationally; setting changes on
// the rising edge of store_req while irq is high.
module d2vfs_interrupt_driver
  import dvfs_pkg::*;
(
  input  logic    clr_n,
  input  thermo_t det,
  input  logic    store_req,
  output logic    irq,
  output logic    up,
  output logic    down,
  output thermo_t setting
);

  logic eq;
  logic store;

  window_comparator #(.W(N_WIN)) u_cmp (
    .a (det),
    .b (setting),
    .gt(up),
    .eq(eq),
    .lt(down)
  );

  assign irq   = ~eq;
  assign store = irq & store_req;   // Store Current Window (AND gate)

  // Direction outputs are exclusive and the interrupt is exactly their union.
  always_comb begin
    assert final (!(up && down) && (irq == (up || down)))
      else $error("window comparator outputs inconsistent: up=%b down=%b irq=%b", up, down, irq);
  end

  window_setting_reg #(.W(N_WIN)) u_reg (
    .clk  (store),
    .clr_n(clr_n),
    .d    (det),
    .q    (setting)
  );

endmodule
