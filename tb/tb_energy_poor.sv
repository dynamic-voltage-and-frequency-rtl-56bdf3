// tb_energy_poor: intermittent operation from an energy-poor source. A 5 V
// source charges an 80 uF capacitor in bursts, and only while the device is
// off. Each controller runs the MCU from its own capacitor through repeated
// energy cycles.
//
// Assumptions of this bench: the source charges through 1 kOhm; a burst lasts
// 200 ms every 1 s; the MCU energy model is that of tb_single_discharge
// (0.85 nJ per cycle at 3.3 V, scaling with V^2, 90 % regulator efficiency).
// The D2VFS MCU boots at 3.6 V and runs to 1.8 V. Time advances in 100 us
// steps.
//
// Checked: every energy cycle boots at 3.6 V, steps down through all four
// windows in order and browns out below 1.8 V; each burst yields exactly one
// energy cycle; while the device is off the source is applied, while it is on
// it is not; both controllers finish the same number of cycles and execute
// work in every one.
module tb_energy_poor;
  import dvfs_pkg::*;

  localparam real C      = 80e-6;
  localparam real RS     = 1000.0;
  localparam real VS     = 5.0;
  localparam real DT     = 100e-6;
  localparam real E16    = 0.85e-9;
  localparam real ETA    = 0.9;
  localparam int  PERIOD = 10000;    // steps: 1 s
  localparam int  BURST  = 2000;     // steps: 200 ms
  localparam int  NBURST = 5;

  int checks = 0, failures = 0;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic real e_cc(real v);
    return E16 * (v / 3.3) * (v / 3.3);
  endfunction

  // one time step of the capacitor: charge from the source, then load
  function automatic real stepv(real v, logic src, real p_load);
    real e;
    if (src && VS > v) v = VS - (VS - v) * $exp(-DT / (RS * C));
    e = v * v - 2.0 * p_load * DT / C;
    return (e > 0.0) ? $sqrt(e) : 0.0;
  endfunction

  function automatic mv_t to_mv(real v);
    return mv_t'(int'(v * 1000.0 - 0.5));
  endfunction

  // ---------------- FBTC ----------------------------------------------------
  real   fb_v = 0.0;
  mv_t   fb_vcap, fb_vreg, fb_vrc, fb_vrd;
  vsel_t fb_mvsel = '1, fb_vsel;
  logic  fb_oe = 0, fb_en, fb_chg, fb_dis;
  assign fb_vcap = to_mv(fb_v);
  assign fb_vreg = fb_en ? ((fb_vcap < mv_t'(mv_of_vsel(fb_vsel))) ? fb_vcap
                                                                    : mv_t'(mv_of_vsel(fb_vsel))) : '0;
  fbtc u_fbtc (.vcap_mv(fb_vcap), .vreg_mv(fb_vreg), .von_sel(2'd0), .mcu_vsel(fb_mvsel),
               .mcu_vsel_oe(fb_oe), .reg_en(fb_en), .vsel(fb_vsel), .vref_charge_mv(fb_vrc),
               .vref_discharge_mv(fb_vrd), .charge_irq(fb_chg), .discharge_irq(fb_dis));

  // ---------------- D2VFS ---------------------------------------------------
  real     d2_v = 0.0;
  mv_t     d2_vcap;
  logic    d2_clr_n = 1, d2_store = 0, d2_irq, d2_up, d2_down;
  thermo_t d2_det, d2_set;
  assign d2_vcap = to_mv(d2_v);
  d2vfs u_d2 (.vcap_mv(d2_vcap), .clr_n(d2_clr_n), .store_req(d2_store), .irq(d2_irq),
              .up(d2_up), .down(d2_down), .det(d2_det), .setting(d2_set));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int     fb_w = 3, fb_trail = 3, d2_w = 3, d2_trail = 3;
    int     fb_cycles = 0, d2_cycles = 0;
    logic   d2_on = 0, fb_was = 0;
    longint fb_work = 0, d2_work = 0, fb_work_start = 0, d2_work_start = 0;
    int     fb_boots_in_burst = 0, d2_boots_in_burst = 0;

    for (int s = 0; s < NBURST * PERIOD; s++) begin
      logic burst;
      real  p;
      burst = (s % PERIOD) < BURST;
      if (s % PERIOD == 0) begin
        fb_boots_in_burst = 0; d2_boots_in_burst = 0;
      end

      // ---- FBTC board
      if (fb_en && !fb_was) begin
        chk(fb_v >= 3.6 && fb_v < 3.7, "FBTC boots at 3.6 V");
        fb_w = 3; fb_trail = 3; fb_mvsel = vsel_of_mv(WIN_VMIN_MV[3]); fb_oe = 1;
        fb_work_start = fb_work; fb_boots_in_burst++;
      end
      if (!fb_en && fb_was) begin
        fb_cycles++; fb_oe = 0;
        chk(fb_trail == 0, "FBTC reached the 1 MHz window before brown-out");
        chk(fb_work > fb_work_start, "FBTC did work in the energy cycle");
      end
      fb_was = fb_en;
      p = fb_en ? e_cc(real'(mv_of_vsel(fb_vsel)) / 1000.0) * WIN_FREQ_MHZ[fb_w] * 1.0e6 / ETA : 0.0;
      if (fb_en) fb_work += longint'(WIN_FREQ_MHZ[fb_w] * 100);   // cycles per 100 us
      fb_v = stepv(fb_v, burst && !fb_en, p);

      // ---- D2VFS board
      if (!d2_on && d2_v >= 3.6) begin
        d2_clr_n = 0; #1; d2_clr_n = 1; #1;
        d2_on = 1; d2_w = 3; d2_trail = 3;
        d2_store = 1; #1; d2_store = 0;
        d2_work_start = d2_work; d2_boots_in_burst++;
      end else if (d2_on && d2_v < 1.8) begin
        d2_on = 0; d2_cycles++;
        chk(d2_trail == 0, "D2VFS reached the 1 MHz window before brown-out");
        chk(d2_work > d2_work_start, "D2VFS did work in the energy cycle");
      end
      p = d2_on ? e_cc(real'(WIN_VMIN_MV[d2_w]) / 1000.0) * WIN_FREQ_MHZ[d2_w] * 1.0e6 / ETA : 0.0;
      if (d2_on) d2_work += longint'(WIN_FREQ_MHZ[d2_w] * 100);
      d2_v = stepv(d2_v, burst && !d2_on, p);

      #1;
      // ---- interrupt service, one per step
      if (fb_en && fb_oe && fb_dis && fb_w > 0) begin
        fb_w--; fb_mvsel = vsel_of_mv(WIN_VMIN_MV[fb_w]);
        chk(fb_w == fb_trail - 1, "FBTC steps down one window at a time");
        fb_trail = fb_w;
      end
      if (d2_on && d2_irq) begin
        if (d2_down && d2_det != '0) begin
          d2_w = int'(win_of_thermo(d2_det));
          chk(d2_w == d2_trail - 1, "D2VFS steps down one window at a time");
          d2_trail = d2_w;
        end
        d2_store = 1; #1; d2_store = 0;
      end
      #1;
      if (s % PERIOD == PERIOD - 1) begin
        chk(fb_boots_in_burst == 1 && d2_boots_in_burst == 1, "one energy cycle per burst");
      end
    end
    chk(fb_cycles == NBURST && d2_cycles == NBURST, "all energy cycles completed");
    $display("energy cycles: FBTC=%0d D2VFS=%0d; MCU cycles: FBTC=%0d D2VFS=%0d",
             fb_cycles, d2_cycles, fb_work, d2_work);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
