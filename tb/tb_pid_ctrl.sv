// tb_pid_ctrl: compares the PID with a 64-bit integer model of its
// equations (derivative low-pass, feedforward, clamp, frozen integrator)
// for random errors, gains and limits; also checks that a constant error
// with a pure integral gain ramps the output by ki*e per sample and stops
// at the limit.
module tb_pid_ctrl;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, stb = 0;
  logic signed [47:0] err = 0;
  gain_t kp = 0, ki = 0, kd = 0;
  logic [3:0] d_shift = 0;
  logic signed [31:0] ff = 0, u;
  logic [30:0] lim = 31'd30000;
  logic u_upd, sat;
  int checks = 0, failures = 0;

  pid_ctrl #(.W_IN(48), .W_OUT(32)) dut (.clk, .rst_n, .stb, .err, .kp, .ki, .kd, .d_shift,
    .ff, .lim, .u, .u_upd, .sat);

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

  longint m_i = 0, m_d = 0, m_prev = 0, m_u = 0;
  bit m_sat;

  task automatic pulse;
    longint e, raw, dn, acc, l;
    @(posedge clk); stb <= 1;
    @(posedge clk); stb <= 0;
    e   = longint'(err);
    raw = e - m_prev;
    dn  = m_d + ((raw - m_d) >>> d_shift);
    acc = ((longint'(kp) * e + longint'(ki) * m_i + longint'(kd) * dn) >>> 24) + longint'(ff);
    l   = longint'(lim);
    m_sat = (acc > l) || (acc < -l);
    m_u = (acc > l) ? l : (acc < -l) ? -l : acc;
    if (!m_sat) m_i += e;
    m_d = dn; m_prev = e;
    #1;
    check(u_upd, "u_upd");
    check(longint'(u) == m_u, $sformatf("u %0d exp %0d", u, m_u));
    check(sat == m_sat, "sat");
  endtask

  int prev_u;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      if (i % 40 == 0) begin
        kp = gain_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
        ki = gain_t'($signed($urandom_range(0, 1 << 16)) - (1 << 15));
        kd = gain_t'($signed($urandom_range(0, 1 << 21)) - (1 << 20));
        d_shift = 4'($urandom_range(0, 6));
        lim = 31'($urandom_range(1000, 2_000_000));
      end
      err = 48'($signed($urandom_range(0, 1 << 30)) - (1 << 29));
      ff  = 32'($signed($urandom_range(0, 20000)) - 10000);
      pulse();
    end
    // pure integral action: constant error 1000, ki = 2^24 / 4 (0.25)
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    m_i = 0; m_d = 0; m_prev = 0;
    kp = 0; kd = 0; ki = 1 << 22; ff = 0; err = 1000; lim = 31'd100_000;
    pulse(); prev_u = u;
    for (int i = 0; i < 10; i++) begin
      pulse();
      check(u - prev_u == 250, $sformatf("integral ramp %0d", u - prev_u));
      prev_u = u;
    end
    repeat (500) pulse();
    check(u == 100_000 && sat, "stops at the limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
