// tb_vsel_pullup: undriven VSEL pins must read all ones (3.3 V setting);
// driven pins must pass the MCU value.
module tb_vsel_pullup;
  int checks = 0, failures = 0;
  logic [3:0] mv, v;
  logic oe;

  vsel_pullup dut (.mcu_vsel(mv), .mcu_vsel_oe(oe), .vsel(v));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      mv = 4'(i); oe = i[4];
      #1;
      checks++;
      if (v !== (oe ? 4'(i) : 4'b1111)) begin
        failures++;
        $display("FAIL oe=%b mcu=%b vsel=%b", oe, mv, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
