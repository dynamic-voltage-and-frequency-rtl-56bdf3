// tb_single_discharge: one discharge of a 100 uF capacitor from 3.6 V, the
// experiment used to motivate scaling: how many MCU clock cycles does one
// full buffer buy?
//
// Each controller gets its own capacitor. The MCU runs in chunks of 500
// cycles; after each chunk the capacitor voltage is lowered by the energy
// drawn, V' = sqrt(V^2 - 2E/C). Energy model (an assumption of this bench,
// not a measured curve): energy per cycle scales as the square of the supply,
// e(V) = 0.85 nJ * (V / 3.3 V)^2, 0.85 nJ being the 16 MHz, 3.3 V figure;
// with a regulator the capacitor supplies e(V_reg) / 0.9. A window change
// costs 18 cycles of driver code. Controller quiescent current and the
// frequency dependence of the MCU's efficiency are ignored, so the counts are
// only indicative.
//
// Checked: both controllers visit all four windows in order; FBTC runs until
// its regulator switches off below 1.8 V; both execute more cycles than the
// unregulated static 16 MHz (3.6 -> 3.3 V) and static 1 MHz (3.6 -> 1.8 V)
// settings computed with the same model; and the static 16 MHz count lies
// near the 103.5 uJ / 0.93 nJ worked out by hand.
module tb_single_discharge;
  import dvfs_pkg::*;

  localparam real C      = 100e-6;
  localparam real E16    = 0.85e-9;
  localparam real ETA    = 0.9;
  localparam int  CHUNK  = 500;
  localparam int  SWITCH = 18;

  int checks = 0, failures = 0;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic real e_cc(real v);
    return E16 * (v / 3.3) * (v / 3.3);
  endfunction

  function automatic real drain(real v, real e);
    real v2 = v * v - 2.0 * e / C;
    return (v2 > 0.0) ? $sqrt(v2) : 0.0;
  endfunction

  function automatic mv_t to_mv(real v);
    return mv_t'(int'(v * 1000.0 - 0.5));
  endfunction

  // ---------------- FBTC with its own capacitor ----------------------------
  real        fb_v = 3.6;
  mv_t        fb_vcap, fb_vreg, fb_vrc, fb_vrd;
  vsel_t      fb_mvsel = '1, fb_vsel;
  logic       fb_en, fb_chg, fb_dis;
  assign fb_vcap = to_mv(fb_v);
  assign fb_vreg = fb_en ? ((fb_vcap < mv_t'(mv_of_vsel(fb_vsel))) ? fb_vcap
                                                                    : mv_t'(mv_of_vsel(fb_vsel))) : '0;

  fbtc u_fbtc (.vcap_mv(fb_vcap), .vreg_mv(fb_vreg), .von_sel(2'd0), .mcu_vsel(fb_mvsel),
               .mcu_vsel_oe(1'b1), .reg_en(fb_en), .vsel(fb_vsel), .vref_charge_mv(fb_vrc),
               .vref_discharge_mv(fb_vrd), .charge_irq(fb_chg), .discharge_irq(fb_dis));

  // ---------------- D2VFS with its own capacitor ---------------------------
  real     d2_v = 3.6;
  mv_t     d2_vcap;
  logic    d2_clr_n = 1, d2_store = 0, d2_irq, d2_up, d2_down;
  thermo_t d2_det, d2_set;
  assign d2_vcap = to_mv(d2_v);

  d2vfs u_d2 (.vcap_mv(d2_vcap), .clr_n(d2_clr_n), .store_req(d2_store), .irq(d2_irq),
              .up(d2_up), .down(d2_down), .det(d2_det), .setting(d2_set));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint fb_cyc = 0, d2_cyc = 0, s16 = 0, s1 = 0;
    int     w, trail;
    real    v;

    // static 16 MHz: unregulated, runs while V_cap >= 3.3 V
    v = 3.6;
    while (v >= 3.3) begin v = drain(v, CHUNK * e_cc(v)); s16 += CHUNK; end
    // static 1 MHz: unregulated, runs while V_cap >= 1.8 V
    v = 3.6;
    while (v >= 1.8) begin v = drain(v, CHUNK * e_cc(v)); s1 += CHUNK; end

    // FBTC: boots at 3.6 V into the 16 MHz window
    #1;
    chk(fb_en, "FBTC on at 3.6 V");
    w = 3; trail = 3;
    fb_mvsel = vsel_of_mv(WIN_VMIN_MV[w]);
    while (fb_en) begin
      real vr;
      vr = real'(mv_of_vsel(fb_vsel)) / 1000.0;
      fb_v = drain(fb_v, CHUNK * e_cc(vr) / ETA);
      fb_cyc += CHUNK;
      #1;
      if (fb_en && fb_dis && w > 0) begin
        w--;
        fb_mvsel = vsel_of_mv(WIN_VMIN_MV[w]);
        fb_v = drain(fb_v, SWITCH * e_cc(vr) / ETA);
        fb_cyc += SWITCH;
        chk(w == trail - 1, "FBTC visits the windows in order");
        trail = w;
        #1;
      end
    end
    chk(trail == 0, "FBTC reached the 1 MHz window");
    chk(fb_v < 1.8, "FBTC ran down to V_min");

    // D2VFS: boots at 3.6 V; MCU runs while V_cap >= 1.8 V
    d2_clr_n = 0; #1; d2_clr_n = 1; #1;
    w = 3; trail = 3;
    d2_store = 1; #1; d2_store = 0; #1;
    while (d2_v >= 1.8) begin
      real vr;
      vr = real'(WIN_VMIN_MV[w]) / 1000.0;
      d2_v = drain(d2_v, CHUNK * e_cc(vr) / ETA);
      d2_cyc += CHUNK;
      #1;
      if (d2_irq && d2_down && d2_det != '0) begin
        w = int'(win_of_thermo(d2_det));
        chk(w == trail - 1, "D2VFS visits the windows in order");
        trail = w;
        d2_v = drain(d2_v, SWITCH * e_cc(vr) / ETA);
        d2_cyc += SWITCH;
        d2_store = 1; #1; d2_store = 0; #1;
      end
    end
    chk(trail == 0, "D2VFS reached the 1 MHz window");

    $display("cycles in one 100 uF discharge: static16=%0d static1=%0d FBTC=%0d D2VFS=%0d",
             s16, s1, fb_cyc, d2_cyc);
    chk(s16 > 100000 && s16 < 125000, "static 16 MHz near 103.5 uJ / 0.93 nJ = 111k cycles");
    chk(fb_cyc > s16 && fb_cyc > s1, "FBTC beats both static settings");
    chk(d2_cyc > s16 && d2_cyc > s1, "D2VFS beats both static settings");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
