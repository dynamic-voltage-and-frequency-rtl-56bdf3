// tb_changepoint_detector: checks the divider voltages against the reduced
// ratios 200/203 (150 k over 10 M) and 4/5 (2 M over 8 M), the two detector
// outputs over random V_cap/V_reg pairs, and the operating points worked out
// by hand: with V_reg = 3.3 V the discharge detector fires below about
// 3.35 V of V_cap; with V_reg = 1.8 V the charge detector fires above 2.25 V.
module tb_changepoint_detector;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t  vcap, vreg, vrd, vrc;
  logic dis, chg;

  changepoint_detector dut (.vcap_mv(vcap), .vreg_mv(vreg), .vref_discharge_mv(vrd),
                            .vref_charge_mv(vrc), .discharge(dis), .charge(chg));

  task automatic check(input int c, input int r);
    int ed, ec;
    vcap = mv_t'(c); vreg = mv_t'(r);
    #1;
    ed = (c * 200) / 203;
    ec = (c * 4) / 5;
    checks++;
    if (vrd !== mv_t'(ed) || vrc !== mv_t'(ec) || dis !== (r > ed) || chg !== (ec > r)) begin
      failures++;
      if (failures < 10)
        $display("FAIL vcap=%0d vreg=%0d vrd=%0d/%0d vrc=%0d/%0d dis=%b chg=%b",
                 c, r, vrd, ed, vrc, ec, dis, chg);
    end
  endtask

  task automatic expect_bits(input int c, input int r, input logic d, input logic ch);
    vcap = mv_t'(c); vreg = mv_t'(r);
    #1;
    checks++;
    if (dis !== d || chg !== ch) begin
      failures++;
      $display("FAIL point vcap=%0d vreg=%0d dis=%b chg=%b expected %b %b", c, r, dis, chg, d, ch);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_bits(3600, 3300, 0, 0);   // top of the 16 MHz window: quiet
    expect_bits(3360, 3300, 0, 0);
    expect_bits(3340, 3300, 1, 0);   // ~3.35 V: move down
    expect_bits(2240, 1800, 0, 0);
    expect_bits(2260, 1800, 0, 1);   // 2.25 V: move up from 1 MHz
    expect_bits(2300, 2200, 0, 0);   // after moving up: no bounce back
    for (int c = 1500; c <= 3700; c += 7)
      for (int r = 1800; r <= 3300; r += 100) check(c, r);
    repeat (2000) check($urandom_range(0, 8191), $urandom_range(0, 8191));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
