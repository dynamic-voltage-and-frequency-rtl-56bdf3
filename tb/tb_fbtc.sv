// tb_fbtc: the FBTC controller with a simple regulator stand-in
// (V_reg = min(selected voltage, V_cap) when enabled, else 0). Charges to the
// 3.6 V boot threshold and checks power-on with the pulled-up 3.3 V setting;
// then, with the MCU driving VSEL, checks that the discharge interrupt fires
// near each window's lower bound and the charge interrupt on the way up,
// and that the regulator turns off below 1.8 V. It also checks the one place
// where the published divider values let the controller bounce between two
// windows (see the comment in the discharge loop).
module tb_fbtc;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t        vcap, vreg, vrc, vrd;
  logic [1:0] von_sel = 2'd0;
  vsel_t      mcu_vsel = '0, vsel;
  logic       oe = 0, reg_en, chg, dis;
  int         win;
  int         n_dis = 0, n_chg = 0, n_bounce = 0;

  fbtc dut (.vcap_mv(vcap), .vreg_mv(vreg), .von_sel(von_sel), .mcu_vsel(mcu_vsel),
            .mcu_vsel_oe(oe), .reg_en(reg_en), .vsel(vsel), .vref_charge_mv(vrc),
            .vref_discharge_mv(vrd), .charge_irq(chg), .discharge_irq(dis));

  always_comb begin
    int t;
    t = VSEL_BASE_MV + VSEL_STEP_MV * int'(vsel);
    vreg = reg_en ? mv_t'((int'(vcap) < t) ? int'(vcap) : t) : '0;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (vcap=%0d vreg=%0d win=%0d)", what, vcap, vreg, win);
    end
  endtask

  // MCU stand-in: one window per interrupt, discharge masked in window 0.
  task automatic service();
    if (!reg_en) return;               // MCU unpowered
    if (dis && win > 0) begin
      n_dis++; win--;
      mcu_vsel = vsel_of_mv(WIN_VMIN_MV[win]);
      #1;
    end else if (chg && win < 3) begin
      n_chg++; win++;
      mcu_vsel = vsel_of_mv(WIN_VMIN_MV[win]);
      #1;
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vcap = '0; #1;
    chk(!reg_en, "off at 0 V");
    for (int v = 0; v < 3600; v += 10) begin vcap = mv_t'(v); #1; end
    chk(!reg_en, "still off just below V_on");
    vcap = 13'd3600; #1;
    chk(reg_en, "on at V_on");
    chk(vsel == 4'b1111 && vreg == 13'd3300, "pull-ups select 3.3 V before MCU drives VSEL");
    // MCU takes over in the 16 MHz window
    win = 3; mcu_vsel = vsel_of_mv(3300); oe = 1; #1;
    for (int v = 3600; v >= 1700; v -= 5) begin
      int w_prev;
      vcap = mv_t'(v); #1;
      w_prev = win;
      service();
      if (win < w_prev)
        chk((v < WIN_VMIN_MV[w_prev] + 50 && v >= WIN_VMIN_MV[w_prev]) ||
            (w_prev == 2 && v >= 2750 && v < 2845),
            "downward move within 50 mV above the window's lower bound");
      if (win > w_prev) begin
        // With the paper's 2 M / 8 M charge divider (ratio 0.8) the charge
        // detector is already active in the 8 MHz window while
        // 0.8 * V_cap > 2.2 V, i.e. above 2.75 V: the controller bounces
        // between 8 and 12 MHz while V_cap falls from about 2.84 to 2.75 V.
        n_bounce++;
        chk(w_prev == 1 && v > 2750 && v < 2845, "bounce only in the 2.75..2.84 V band");
      end
    end
    chk(n_bounce > 0, "predicted 8/12 MHz bounce band observed");
    n_dis -= n_bounce;
    chk(win == 0, "reached the 1 MHz window");
    chk(n_dis == 3, "three discharge interrupts");
    vcap = 13'd1790; #1;
    chk(!reg_en, "off below V_min");
    // recharge: boots at V_on again, then climbs
    oe = 0; n_chg = 0;
    for (int v = 1790; v <= 3600; v += 10) begin vcap = mv_t'(v); #1; end
    chk(reg_en && vreg == 13'd3300, "reboot at 3.6 V with 3.3 V");
    // from a 1 MHz setting, charging must raise charge interrupts
    oe = 1; win = 0; mcu_vsel = vsel_of_mv(1800);
    for (int v = 1900; v <= 3600; v += 5) begin
      vcap = mv_t'(v); #1;
      service();
    end
    chk(n_chg >= 3 && win == 3, "charge interrupts walk up to 16 MHz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
