// tb_dvfs_top: end-to-end test of both controllers at their default sizes.
//
// The testbench supplies what lies outside the controller hardware:
//  * a capacitor-voltage profile shared by both boards: charge from 0 V to
//    3.6 V, discharge to 1.9 V, recharge to 3.6 V, discharge to 1.7 V
//    (brown-out), recharge to 3.0 V with the FBTC boot threshold set to 2.8 V;
//  * for each board an MCU driver model, i.e. the software policy: one window
//    per interrupt; when moving down, frequency first and voltage second;
//    when moving up, voltage first; for D2VFS an upward move goes only to the
//    window below the one detected (the deferral that avoids bouncing);
//    for FBTC the discharge interrupt is masked in the lowest window;
//  * a regulator stand-in: V_reg = min(selected voltage, V_cap) when enabled.
// The D2VFS MCU is taken to boot at 3.6 V and run down to 1.8 V.
//
// Checked all along: the frequency never exceeds what the selected supply
// allows; after each D2VFS interrupt the window equals the detected one
// (downwards) or one below it (upwards); FBTC moves down only within 50 mV of
// a window's lower bound; FBTC bounces only in the 2.75..2.84 V band that the
// published divider values leave. Every mechanism must occur at least once.
module tb_dvfs_top;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;

  // ---------------- shared capacitor voltage and DUT ----------------------
  mv_t        vcap = '0;
  logic       tick = 0;
  always #1 tick = ~tick;              // MCU instruction-time base

  logic       d2_clr_n = 1, d2_store_req = 0;
  logic       d2_irq, d2_up, d2_down;
  thermo_t    d2_det, d2_setting;
  mv_t        fb_vreg, fb_vrc, fb_vrd;
  logic [1:0] fb_von_sel = 2'd0;
  vsel_t      fb_mcu_vsel = '0, fb_vsel;
  logic       fb_mcu_vsel_oe = 0, fb_reg_en, fb_chg, fb_dis;

  dvfs_top dut (
    .vcap_mv(vcap),
    .d2_clr_n(d2_clr_n), .d2_store_req(d2_store_req), .d2_irq(d2_irq),
    .d2_up(d2_up), .d2_down(d2_down), .d2_det(d2_det), .d2_setting(d2_setting),
    .fb_vreg_mv(fb_vreg), .fb_von_sel(fb_von_sel), .fb_mcu_vsel(fb_mcu_vsel),
    .fb_mcu_vsel_oe(fb_mcu_vsel_oe), .fb_reg_en(fb_reg_en), .fb_vsel(fb_vsel),
    .fb_vref_charge_mv(fb_vrc), .fb_vref_discharge_mv(fb_vrd),
    .fb_charge_irq(fb_chg), .fb_discharge_irq(fb_dis)
  );

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t vcap=%0d: %s", $time, vcap, what);
    end
  endtask

  function automatic int min_mv(int a, int b);
    return (a < b) ? a : b;
  endfunction

  // ---------------- FBTC regulator stand-in --------------------------------
  assign fb_vreg = fb_reg_en ? mv_t'(min_mv(int'(vcap), int'(mv_of_vsel(fb_vsel)))) : '0;

  // ---------------- D2VFS MCU + regulator model ----------------------------
  logic d2_on = 0;
  int   d2_win = 0, d2_fwin = 0;        // supply window and frequency window
  int   d2_vreg_sel = 0;                // selected regulator voltage, mV
  int   n_d2_boot = 0, n_d2_down = 0, n_d2_defer = 0, n_d2_up = 0, n_d2_off = 0;

  function automatic int det_win(thermo_t t);   // -1 below 1.8 V
    return t[3] ? 3 : t[2] ? 2 : t[1] ? 1 : t[0] ? 0 : -1;
  endfunction

  task automatic d2_set(input int w, input logic down);
    if (down) begin
      d2_fwin = w; @(posedge tick); d2_vreg_sel = WIN_VMIN_MV[w];
    end else begin
      d2_vreg_sel = WIN_VMIN_MV[w]; @(posedge tick); d2_fwin = w;
    end
    d2_win = w;
  endtask

  initial begin : d2_mcu
    forever begin
      @(posedge tick);
      if (!d2_on) begin
        if (vcap >= 13'd3600) begin          // boot
          d2_clr_n = 0; @(posedge tick); d2_clr_n = 1;
          d2_on = 1; n_d2_boot++;
          chk(d2_irq && d2_up, "D2VFS: boot raises an interrupt (setting cleared)");
          d2_set(det_win(d2_det), 0);
          d2_store_req = 1; @(posedge tick); d2_store_req = 0;
        end
      end else if (vcap < 13'd1800) begin
        d2_on = 0; n_d2_off++;
      end else if (d2_irq) begin
        int d;
        d = det_win(d2_det);
        if (d < d2_win) begin
          chk(d2_down, "D2VFS: direction output says down");
          n_d2_down++;
          d2_set(d, 1);
          chk(d2_win == d, "D2VFS: window equals detected window after down move");
        end else if (d > d2_win) begin
          chk(d2_up, "D2VFS: direction output says up");
          if (d - 1 > d2_win) begin
            n_d2_up++;
            d2_set(d - 1, 0);
          end else n_d2_defer++;
          chk(d2_win == d - 1, "D2VFS: window one below detected after up interrupt");
        end
        d2_store_req = 1; @(posedge tick); d2_store_req = 0;
        @(posedge tick);
        chk(!d2_irq || det_win(d2_det) != det_win(d2_setting),
            "D2VFS: store clears the interrupt");
      end
    end
  end

  // ---------------- FBTC MCU model -----------------------------------------
  int fb_win = 0, fb_fwin = 0;
  int n_fb_on = 0, n_fb_off = 0, n_fb_pullup = 0, n_fb_dis = 0, n_fb_chg = 0;
  int n_fb_mask = 0, n_fb_bounce = 0, n_fb_boot28 = 0;
  logic fb_running = 0;

  task automatic fb_set(input int w, input logic down);
    if (down) begin
      fb_fwin = w; @(posedge tick); fb_mcu_vsel = vsel_of_mv(WIN_VMIN_MV[w]);
    end else begin
      fb_mcu_vsel = vsel_of_mv(WIN_VMIN_MV[w]); @(posedge tick); fb_fwin = w;
    end
    fb_win = w;
  endtask

  initial begin : fb_mcu
    forever begin
      @(posedge tick);
      if (!fb_reg_en) begin
        if (fb_running) n_fb_off++;
        fb_running = 0; fb_mcu_vsel_oe = 0; fb_fwin = 0;
      end else if (!fb_running) begin
        n_fb_on++;
        if (fb_von_sel == 2'd2) n_fb_boot28++;
        chk(vcap >= (fb_von_sel == 2'd0 ? 13'd3600 : 13'd2800), "FBTC: powered only from V_on");
        chk(fb_vsel == 4'b1111, "FBTC: VSEL pulled up to 3.3 V during MCU startup");
        if (fb_vsel == 4'b1111) n_fb_pullup++;
        repeat (5) @(posedge tick);             // startup code
        fb_win = 3; fb_fwin = 3;
        fb_mcu_vsel = vsel_of_mv(WIN_VMIN_MV[3]); fb_mcu_vsel_oe = 1;
        fb_running = 1;
      end else if (fb_dis && fb_win > 0) begin
        chk((vcap < WIN_VMIN_MV[fb_win] + 50 && vcap >= WIN_VMIN_MV[fb_win]) ||
            (vcap >= 13'd2750 && vcap < 13'd2845) || vcap < WIN_VMIN_MV[fb_win],
            "FBTC: down move near the window's lower bound");
        n_fb_dis++;
        fb_set(fb_win - 1, 1);
      end else if (fb_dis && fb_win == 0) begin
        n_fb_mask++;                           // masked in the lowest window
      end else if (fb_chg && fb_win < 3) begin
        if (fb_win == 1 && fb_dis == 0 && vcap < 13'd2845 && vcap > 13'd2750) n_fb_bounce++;
        n_fb_chg++;
        fb_set(fb_win + 1, 0);
      end
    end
  end

  // ---------------- safety invariants, checked at every tick ---------------
  always @(negedge tick) begin
    if (d2_on) chk(d2_vreg_sel >= int'(WIN_VMIN_MV[d2_fwin]), "D2VFS: frequency above supply window");
    if (fb_running)
      chk(int'(mv_of_vsel(fb_vsel)) >= int'(WIN_VMIN_MV[fb_fwin]), "FBTC: frequency above supply window");
  end

  // ---------------- capacitor voltage profile ------------------------------
  task automatic ramp(input int from, input int to);
    int step = (to > from) ? 5 : -5;
    for (int v = from; v != to; v += step) begin
      vcap = mv_t'(v);
      repeat (4) @(posedge tick);
    end
    vcap = mv_t'(to);
    repeat (20) @(posedge tick);
  endtask

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge tick);
    ramp(0, 3600);
    chk(d2_on && d2_win == 3 && fb_running && fb_win == 3, "both boot into the 16 MHz window");
    ramp(3600, 1900);
    chk(d2_win == 0 && fb_win == 0, "both in the 1 MHz window at 1.9 V");
    ramp(1900, 3600);
    chk(d2_win == 2, "D2VFS: deferred scaling ends one window below the top");
    chk(fb_win == 3, "FBTC: charge interrupts reach the 16 MHz window");
    ramp(3600, 1700);
    chk(!d2_on && !fb_reg_en, "both off below 1.8 V");
    fb_von_sel = 2'd2;                         // fit the 2.8 V boot detector
    ramp(1700, 3000);
    chk(fb_reg_en && fb_running, "FBTC boots at the 2.8 V threshold");
    chk(!d2_on, "D2VFS stays off below its 3.6 V boot voltage");

    // every mechanism must have happened
    chk(n_d2_boot   >= 1, "mechanism: D2VFS boot interrupt");
    chk(n_d2_down   >= 3, "mechanism: D2VFS downward interrupts");
    chk(n_d2_defer  >= 1, "mechanism: D2VFS deferred upward interrupt");
    chk(n_d2_up     >= 1, "mechanism: D2VFS applied upward interrupt");
    chk(n_d2_off    >= 1, "mechanism: D2VFS brown-out");
    chk(n_fb_on     >= 2, "mechanism: FBTC power-on at V_on");
    chk(n_fb_off    >= 1, "mechanism: FBTC power-off at V_min");
    chk(n_fb_pullup >= 2, "mechanism: FBTC VSEL pull-up start");
    chk(n_fb_dis    >= 3, "mechanism: FBTC discharge interrupt");
    chk(n_fb_chg    >= 3, "mechanism: FBTC charge interrupt");
    chk(n_fb_mask   >= 1, "mechanism: FBTC discharge interrupt masked in lowest window");
    chk(n_fb_boot28 >= 1, "mechanism: FBTC alternative V_on detector");
    $display("mechanisms: d2 boot=%0d down=%0d defer=%0d up=%0d off=%0d | fb on=%0d off=%0d pullup=%0d dis=%0d chg=%0d masked=%0d bounce=%0d boot28=%0d",
             n_d2_boot, n_d2_down, n_d2_defer, n_d2_up, n_d2_off, n_fb_on, n_fb_off,
             n_fb_pullup, n_fb_dis, n_fb_chg, n_fb_mask, n_fb_bounce, n_fb_boot28);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
