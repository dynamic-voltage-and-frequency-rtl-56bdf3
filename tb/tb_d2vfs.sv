// tb_d2vfs: sweeps the capacitor voltage down from 3.6 V to 1.7 V and back up
// in 10 mV steps. A simple responder pulses the store strobe whenever the
// interrupt is high. Checks: the detector lines match the window table, an
// interrupt occurs at each of the four window bounds in each direction (and
// nowhere else), and the stored setting follows.
module tb_d2vfs;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  mv_t     vcap;
  logic    clr_n = 1, store_req = 0;
  logic    irq, up, down;
  thermo_t det, setting;
  int      n_irq_down = 0, n_irq_up = 0;

  d2vfs dut (.vcap_mv(vcap), .clr_n(clr_n), .store_req(store_req), .irq(irq),
             .up(up), .down(down), .det(det), .setting(setting));

  function automatic thermo_t ref_code(int v);
    return {v >= 3300, v >= 2800, v >= 2200, v >= 1800};
  endfunction

  task automatic set_v(input int v);
    vcap = mv_t'(v);
    #1;
    checks++;
    if (det !== ref_code(v)) begin
      failures++;
      $display("FAIL v=%0d det=%b expected %b", v, det, ref_code(v));
    end
    if (irq) begin
      if (down) n_irq_down++;
      if (up)   n_irq_up++;
      store_req = 1; #1; store_req = 0; #1;
    end
    checks++;
    if (irq || setting !== ref_code(v)) begin
      failures++;
      $display("FAIL v=%0d irq=%b setting=%b", v, irq, setting);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vcap = 13'd3600;
    #1 clr_n = 0;
    #1 clr_n = 1;
    for (int v = 3600; v >= 1700; v -= 10) set_v(v);
    checks++;
    // one interrupt at boot (setting cleared) and four on the way down
    if (n_irq_up != 1 || n_irq_down != 4) begin
      failures++;
      $display("FAIL discharge interrupts up=%0d down=%0d", n_irq_up, n_irq_down);
    end
    n_irq_up = 0; n_irq_down = 0;
    for (int v = 1700; v <= 3600; v += 10) set_v(v);
    checks++;
    if (n_irq_up != 4 || n_irq_down != 0) begin
      failures++;
      $display("FAIL charge interrupts up=%0d down=%0d", n_irq_up, n_irq_down);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
