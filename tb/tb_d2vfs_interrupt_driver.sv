// tb_d2vfs_interrupt_driver: drives detector codes and MCU store strobes.
// Checks that the interrupt rises exactly when the code differs from the
// stored setting, that up/down give the direction, that a store strobe
// without a pending interrupt changes nothing, and that a strobe while the
// interrupt is pending copies the code and clears the interrupt.
module tb_d2vfs_interrupt_driver;
  import dvfs_pkg::*;

  int checks = 0, failures = 0;
  logic    clr_n = 1, store_req = 0;
  thermo_t det = '0, setting, model;
  logic    irq, up, down;

  d2vfs_interrupt_driver dut (
    .clr_n(clr_n), .det(det), .store_req(store_req),
    .irq(irq), .up(up), .down(down), .setting(setting)
  );

  localparam thermo_t CODES [5] = '{4'b0000, 4'b0001, 4'b0011, 4'b0111, 4'b1111};

  task automatic expect_state(input string what);
    #1;
    checks++;
    if (setting !== model || irq !== (det != model) ||
        up !== (det > model) || down !== (det < model)) begin
      failures++;
      $display("FAIL %s: det=%b setting=%b (exp %b) irq=%b up=%b down=%b",
               what, det, setting, model, irq, up, down);
    end
  endtask

  task automatic strobe();
    store_req = 1;
    if (det != model) model = det;
    expect_state("after store strobe");
    store_req = 0;
    expect_state("strobe released");
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    #1 clr_n = 0;                      // power-on clear pulse
    expect_state("power-on clear");
    clr_n = 1;
    // discharge walk from the 16 MHz window down to off
    det = CODES[4]; expect_state("boot in window 3");
    strobe();
    for (int w = 3; w >= 0; w--) begin
      det = CODES[w]; expect_state("downward change");
      if (!down || !irq) begin failures++; $display("FAIL no down interrupt"); end
      checks++;
      strobe();
      if (irq) begin failures++; $display("FAIL irq still high after store"); end
      checks++;
    end
    // strobe while nothing pending: no change
    strobe();
    // charge walk upwards
    for (int w = 1; w <= 4; w++) begin
      det = CODES[w]; expect_state("upward change");
      if (!up) begin failures++; $display("FAIL no up"); end
      checks++;
      strobe();
    end
    // random codes and strobes
    repeat (300) begin
      det = CODES[$urandom_range(0, 4)];
      expect_state("random code");
      if ($urandom_range(0, 1) != 0) strobe();
    end
    clr_n = 0; model = '0; expect_state("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
