// window_setting_reg: the D2VFS Current Window Setting, a quad D flip-flop
// (74x175 type).
//
// On each rising edge of clk the 4-bit detector code on d is stored; clr_n
// clears the register asynchronously (power-on clear). On the board clk is
// the output of the Store Current Window AND gate, so this register is clocked
// only when the setting must change; there is no free-running clock. The
// register itself follows the paper; the clear value 0 ("no window") is this
// design's choice.
//
// Interface: clk, clr_n (active low, asynchronous), d in, q out.
// Timing: q takes d at the rising edge of clk.
module window_setting_reg #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         clr_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  always_ff @(posedge clk or negedge clr_n) begin
    if (!clr_n) q <= '0;
    else        q <= d;
  end

endmodule
