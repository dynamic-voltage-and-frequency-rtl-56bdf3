// tb_system_enable: drives the set-reset latch through power-up, the hold
// band between V_min and V_on, set, reset and the both-active case, comparing
// with a reference set-reset model.
module tb_system_enable;
  int checks = 0, failures = 0;
  logic above_vmin, above_von, reg_en;

  system_enable dut (.above_vmin(above_vmin), .above_von(above_von), .reg_en(reg_en));

  task automatic step(input logic vmin, input logic von, input logic exp, input string what);
    above_vmin = vmin; above_von = von;
    #1;
    checks++;
    if (reg_en !== exp) begin
      failures++;
      $display("FAIL %s: vmin=%b von=%b reg_en=%b expected %b", what, vmin, von, reg_en, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    step(0, 0, 0, "below V_min");
    step(1, 0, 0, "charging through hold band stays off");
    step(1, 1, 1, "V_on reached");
    step(1, 0, 1, "discharging through hold band stays on");
    step(0, 0, 0, "below V_min turns off");
    step(1, 0, 0, "recharging stays off");
    step(1, 1, 1, "boot again");
    step(0, 1, 0, "set and reset both active: off");
    // random sequences against a reference model
    begin
      logic m = 0;
      repeat (300) begin
        logic a, b;
        a = 1'($urandom); b = 1'($urandom);
        if (!a)     m = 0;
        else if (b) m = 1;
        step(a, b, m, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
