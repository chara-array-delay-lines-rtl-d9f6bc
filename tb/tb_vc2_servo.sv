// tb_vc2_servo: checks the voice-coil-2 loop against a 64-bit model: error
// = eddy1 - eddy1 target into a PID, plus kff * VC1 drive, clamped to the
// +/-10 V code range, for random inputs and gains; then a pure-P case.
module tb_vc2_servo;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, stb = 0;
  dac_t eddy1 = 0, eddy1_target = 0, vc1_out = 0, vc2_dac;
  servo_gains_t g = '0;
  logic vc2_upd, sat;
  int checks = 0, failures = 0;

  vc2_servo dut (.clk, .rst_n, .stb, .eddy1, .eddy1_target, .vc1_out, .gains(g), .vc2_dac, .vc2_upd, .sat);

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

  task automatic pulse;
    longint e, raw, dn, acc;
    @(posedge clk); stb <= 1;
    @(posedge clk); stb <= 0;
    e    = longint'(eddy1) - longint'(eddy1_target);
    raw  = e - m_prev;
    dn   = m_d + ((raw - m_d) >>> g.d_shift);
    acc  = ((longint'(g.kp) * e + longint'(g.ki) * m_i + longint'(g.kd) * dn) >>> 24)
           + ((longint'(g.kff) * longint'(vc1_out)) >>> 24);
    m_u  = (acc > 32767) ? 32767 : (acc < -32767) ? -32767 : acc;
    if (acc <= 32767 && acc >= -32767) m_i += e;
    m_d = dn; m_prev = e;
    #1;
    check(vc2_upd, "vc2_upd");
    check(longint'(vc2_dac) == m_u, $sformatf("vc2 %0d exp %0d", vc2_dac, m_u));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      if (i % 50 == 0) begin
        g.kp  = gain_t'($signed($urandom_range(0, 1 << 26)) - (1 << 25));
        g.ki  = gain_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
        g.kd  = gain_t'($signed($urandom_range(0, 1 << 25)) - (1 << 24));
        g.kff = gain_t'($signed($urandom_range(0, 1 << 25)) - (1 << 24));
        g.d_shift = 4'($urandom_range(0, 4));
        eddy1_target = 16'($signed($urandom_range(0, 2000)) - 1000);
      end
      eddy1   = 16'($signed($urandom_range(0, 60000)) - 30000);
      vc1_out = 16'($signed($urandom_range(0, 60000)) - 30000);
      pulse();
    end
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    m_i = 0; m_d = 0; m_prev = 0;
    g = '0; g.kp = 1 << 23; g.kff = 1 << 22; eddy1_target = 100;
    eddy1 = 300; vc1_out = 400;
    pulse();
    check(vc2_dac == 200, $sformatf("0.5*(300-100) + 0.25*400 = 200, got %0d", vc2_dac));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
