// tb_window_comparator: exhaustive check of the 4-bit magnitude comparator
// over all 256 input pairs; exactly one output must be high.
module tb_window_comparator;
  int checks = 0, failures = 0;
  logic [3:0] a, b;
  logic gt, eq, lt;

  window_comparator dut (.a(a), .b(b), .gt(gt), .eq(eq), .lt(lt));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a = 4'(i); b = 4'(j);
        #1;
        checks++;
        if (gt !== (i > j) || eq !== (i == j) || lt !== (i < j) || (gt + eq + lt) != 1) begin
          failures++;
          $display("FAIL a=%0d b=%0d gt=%b eq=%b lt=%b", i, j, gt, eq, lt);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
