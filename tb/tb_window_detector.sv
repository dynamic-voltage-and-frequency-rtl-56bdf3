// tb_window_detector: sweeps the capacitor voltage over 0..4 V in 1 mV steps
// and checks the four-detector thermometer code against the window table
// 1.8 / 2.2 / 2.8 / 3.3 V written out here.
module tb_window_detector;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t     vcap;
  thermo_t det, exp;

  window_detector dut (.vcap_mv(vcap), .det(det));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v <= 4000; v++) begin
      vcap = mv_t'(v);
      #1;
      if      (v >= 3300) exp = 4'b1111;
      else if (v >= 2800) exp = 4'b0111;
      else if (v >= 2200) exp = 4'b0011;
      else if (v >= 1800) exp = 4'b0001;
      else                exp = 4'b0000;
      checks++;
      if (det !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL vcap=%0d det=%b expected %b", v, det, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
