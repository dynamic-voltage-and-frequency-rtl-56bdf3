// tb_operating_range_detector: for each of the four V_on selections, sweeps
// V_cap over 0..4 V and checks both detector outputs against the thresholds
// 1.8 V and 3.6 / 3.3 / 2.8 / 2.2 V.
module tb_operating_range_detector;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t        vcap;
  logic [1:0] sel;
  logic       above_vmin, above_von;
  int         von_tab [4] = '{3600, 3300, 2800, 2200};

  operating_range_detector dut (.vcap_mv(vcap), .von_sel(sel),
                                .above_vmin(above_vmin), .above_von(above_von));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++)
      for (int v = 0; v <= 4000; v += 5) begin
        sel = 2'(s); vcap = mv_t'(v);
        #1;
        checks++;
        if (above_vmin !== (v >= 1800) || above_von !== (v >= von_tab[s])) begin
          failures++;
          if (failures < 10)
            $display("FAIL sel=%0d v=%0d vmin=%b von=%b", s, v, above_vmin, above_von);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
