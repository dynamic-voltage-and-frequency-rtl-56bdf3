// window_comparator: the D2VFS Window Comparator, a 4-bit magnitude
// comparator (74x85 type) between the Window Detector code (a) and the
// Current Window Setting (b).
//
// Exactly one of gt, eq, lt is high. Because the detector code is a
// thermometer code, a > b means the capacitor voltage has moved to a higher
// window and a < b to a lower one. The 74x85 cascade inputs are tied to the
// single-device state and not brought out (a choice of this design).
//
// Interface: a, b in; gt, eq, lt out. Combinational.
module window_comparator #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         gt,
  output logic         eq,
  output logic         lt
);

  always_comb begin
    gt = (a > b);
    eq = (a == b);
    lt = (a < b);
  end

endmodule
