// tb_loop_scheduler: checks, at the real 100 MHz clock and default
// parameters, that loop_stb comes every 20000 cycles (5 kHz), target_stb
// every 100000 (1 kHz) and stepper_stb every 1000000 (100 Hz), and that
// the slower strobes always coincide with the faster ones.
module tb_loop_scheduler;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  logic loop_stb, target_stb, stepper_stb;
  int checks = 0, failures = 0;
  longint cyc = 0, last_l = -1, last_t = -1, last_s = -1;
  int nl = 0, nt = 0, ns = 0;

  loop_scheduler dut (.clk, .rst_n, .loop_stb, .target_stb, .stepper_stb);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (target_stb)  check(loop_stb, "target_stb without loop_stb");
    if (stepper_stb) check(target_stb, "stepper_stb without target_stb");
    if (loop_stb) begin
      if (last_l >= 0) check(cyc - last_l == 20000, $sformatf("loop period %0d", cyc - last_l));
      last_l <= cyc; nl++;
    end
    if (target_stb) begin
      if (last_t >= 0) check(cyc - last_t == 100000, $sformatf("target period %0d", cyc - last_t));
      last_t <= cyc; nt++;
    end
    if (stepper_stb) begin
      if (last_s >= 0) check(cyc - last_s == 1000000, $sformatf("stepper period %0d", cyc - last_s));
      last_s <= cyc; ns++;
    end
  end

  initial begin
    #40_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (3_110_000) @(posedge clk);
    check(ns == 4, $sformatf("stepper strobes %0d", ns));
    check(nt == 31, $sformatf("target strobes %0d", nt));
    check(nl == 155, $sformatf("loop strobes %0d", nl));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
