// tb_voltage_detector: checks one voltage detector model at a 2.2 V
// threshold: both sides of the threshold, the threshold itself, the extremes
// of the millivolt range and random codes.
module tb_voltage_detector;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t  vin;
  logic above;

  voltage_detector #(.THRESH_MV(2200)) dut (.vin_mv(vin), .above(above));

  task automatic check(input mv_t v);
    logic exp;
    vin = v;
    #1;
    exp = (v > 13'd2199);
    checks++;
    if (above !== exp) begin
      failures++;
      $display("FAIL vin=%0d above=%0b expected %0b", v, above, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(2199); check(2200); check(2201); check(13'h1fff);
    repeat (500) check(mv_t'($urandom_range(0, 8191)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
