// tb_power_state_controller: charges the capacitor from 0 to 3.7 V and lets
// it fall to 1.5 V, twice, with the 3.6 V and the 2.8 V boot threshold. The
// regulator must switch on exactly at V_on, stay on down to 1.8 V, switch off
// below it and stay off until V_on is reached again.
module tb_power_state_controller;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t        vcap;
  logic [1:0] sel;
  logic       reg_en;
  int         n_on = 0, n_off = 0;

  power_state_controller dut (.vcap_mv(vcap), .von_sel(sel), .reg_en(reg_en));

  task automatic set_v(input int v, input logic exp);
    logic prev = reg_en;
    vcap = mv_t'(v);
    #1;
    if (!prev && reg_en) n_on++;
    if (prev && !reg_en) n_off++;
    checks++;
    if (reg_en !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL v=%0d reg_en=%b expected %b", v, reg_en, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int von;
    for (int s = 0; s < 4; s += 2) begin
      von = (s == 0) ? 3600 : 2800;
      sel = 2'(s);
      set_v(0, 0);
      for (int v = 0;    v <= 3700; v += 10) set_v(v, v >= von);
      for (int v = 3700; v >= 1500; v -= 10) set_v(v, v >= 1800);
      for (int v = 1500; v <= 3700; v += 10) set_v(v, v >= von);
    end
    checks++;
    if (n_on != 4 || n_off != 3) begin
      failures++;
      $display("FAIL transitions on=%0d off=%0d", n_on, n_off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
