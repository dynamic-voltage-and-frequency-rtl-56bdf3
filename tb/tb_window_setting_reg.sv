// tb_window_setting_reg: checks the quad D flip-flop: asynchronous clear,
// capture on the rising edge only, and hold between edges.
module tb_window_setting_reg;
  int checks = 0, failures = 0;
  logic       clk = 0, clr_n = 1;
  logic [3:0] d = '0, q, model;

  window_setting_reg dut (.clk(clk), .clr_n(clr_n), .d(d), .q(q));

  task automatic expect_q(input logic [3:0] e, input string what);
    checks++;
    if (q !== e) begin
      failures++;
      $display("FAIL %s: q=%b expected %b", what, q, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 clr_n = 0;
    #1 expect_q(4'b0000, "clear");
    clr_n = 1; #1;
    model = '0;
    repeat (200) begin
      d = 4'($urandom);
      #1 expect_q(model, "hold before edge");
      clk = 1; model = d;
      #1 expect_q(model, "capture");
      d = ~d;
      #1 expect_q(model, "hold while high");
      clk = 0;
      #1 expect_q(model, "hold on falling edge");
    end
    d = 4'b1111; clk = 1; #1; clk = 0; #1;
    clr_n = 0;
    #1 expect_q(4'b0000, "asynchronous clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
