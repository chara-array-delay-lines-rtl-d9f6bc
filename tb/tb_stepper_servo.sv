// tb_stepper_servo: checks the stepper loop against a 64-bit model: PD on
// the eddy current sensor 2 reading (no integral action even when a
// non-zero ki is supplied), plus kff * target velocity, clamped to the
// step-rate limit; then a case with a constant error, which must give a
// constant output (a PD holds no integral).
module tb_stepper_servo;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, stb = 0;
  dac_t eddy2 = 0;
  vel_t target_vel = 0;
  servo_gains_t g = '0;
  logic signed [31:0] step_rate;
  logic step_upd, sat;
  int checks = 0, failures = 0;

  stepper_servo dut (.clk, .rst_n, .stb, .eddy2, .target_vel, .gains(g), .step_rate, .step_upd, .sat);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint m_d = 0, m_prev = 0, m_u = 0;
  localparam longint RM = 2_000_000;

  task automatic pulse;
    longint e, raw, dn, acc;
    @(posedge clk); stb <= 1;
    @(posedge clk); stb <= 0;
    e    = longint'(eddy2);
    raw  = e - m_prev;
    dn   = m_d + ((raw - m_d) >>> g.d_shift);
    acc  = ((longint'(g.kp) * e + longint'(g.kd) * dn) >>> 24)
           + ((longint'(g.kff) * longint'(target_vel)) >>> 24);
    m_u  = (acc > RM) ? RM : (acc < -RM) ? -RM : acc;
    m_d = dn; m_prev = e;
    #1;
    check(step_upd, "step_upd");
    check(longint'(step_rate) == m_u, $sformatf("rate %0d exp %0d", step_rate, m_u));
  endtask

  int r0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      if (i % 50 == 0) begin
        g.kp  = gain_t'($signed($urandom_range(0, 1 << 30)) - (1 << 29));
        g.ki  = gain_t'($urandom_range(1, 1 << 20));
        g.kd  = gain_t'($signed($urandom_range(0, 1 << 28)) - (1 << 27));
        g.kff = gain_t'($urandom_range(0, 1 << 24));
        g.d_shift = 4'($urandom_range(0, 4));
      end
      eddy2      = 16'($signed($urandom_range(0, 60000)) - 30000);
      target_vel = 32'($signed($urandom_range(0, 1_000_000)) - 500_000);
      pulse();
    end
    g.kd = 0; g.ki = 1 << 24; eddy2 = 1000; target_vel = 125_000;
    pulse(); pulse(); r0 = step_rate;
    repeat (5) pulse();
    check(step_rate == r0, $sformatf("PD output constant under constant error: %0d vs %0d", step_rate, r0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
