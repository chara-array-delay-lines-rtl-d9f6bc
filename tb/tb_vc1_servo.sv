// tb_vc1_servo: checks the voice-coil-1 loop against a 64-bit model: error
// = PZT target - PZT position + low-passed (kff * laser error), then PID,
// clamped to the +/-10 V code range. Random inputs and gains; a final run
// with only the feedforward path active checks the sign and the low-pass
// (the output approaches its final value over several samples).
module tb_vc1_servo;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, stb = 0;
  logic signed [31:0] pzt_target = 0, pzt_pos = 0;
  pos_t laser_err = 0;
  servo_gains_t g = '0;
  dac_t vc1_dac;
  logic vc1_upd, sat;
  int checks = 0, failures = 0;

  vc1_servo dut (.clk, .rst_n, .stb, .pzt_target, .pzt_pos, .laser_err, .gains(g),
    .vc1_dac, .vc1_upd, .sat);

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

  longint m_lp = 0, m_i = 0, m_d = 0, m_prev = 0, m_u = 0;

  task automatic pulse;
    longint ffin, e, raw, dn, acc;
    @(posedge clk); stb <= 1;
    @(posedge clk); stb <= 0;
    ffin = (longint'(g.kff) * longint'(laser_err)) >>> 24;
    m_lp = m_lp + ((ffin - m_lp) >>> g.ff_shift);
    e    = longint'(pzt_target) - longint'(pzt_pos) + m_lp;
    raw  = e - m_prev;
    dn   = m_d + ((raw - m_d) >>> g.d_shift);
    acc  = (longint'(g.kp) * e + longint'(g.ki) * m_i + longint'(g.kd) * dn) >>> 24;
    m_u  = (acc > 32767) ? 32767 : (acc < -32767) ? -32767 : acc;
    if (acc <= 32767 && acc >= -32767) m_i += e;
    m_d = dn; m_prev = e;
    #1;
    check(vc1_upd, "vc1_upd");
    check(longint'(vc1_dac) == m_u, $sformatf("vc1 %0d exp %0d", vc1_dac, m_u));
  endtask

  int first;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      if (i % 50 == 0) begin
        g.kp = gain_t'($signed($urandom_range(0, 4000)) - 2000);
        g.ki = gain_t'($signed($urandom_range(0, 400)) - 200);
        g.kd = gain_t'($signed($urandom_range(0, 4000)) - 2000);
        g.kff = gain_t'($signed($urandom_range(0, 1 << 25)) - (1 << 24));
        g.d_shift = 4'($urandom_range(0, 4));
        g.ff_shift = 4'($urandom_range(0, 4));
      end
      pzt_pos   = 32'($signed($urandom_range(0, 64_000_000)) - 32_000_000);
      laser_err = pos_t'($signed($urandom_range(0, 2_000_000)) - 1_000_000);
      pulse();
    end
    // feedforward only: kp = 1/1024 on the error, kff = 1, ff_shift = 2
    @(negedge clk) rst_n = 0;
    @(negedge clk) rst_n = 1;
    m_lp = 0; m_i = 0; m_d = 0; m_prev = 0;
    g = '0; g.kp = 1 << 14; g.kff = 1 << 24; g.ff_shift = 2;
    pzt_pos = 0; laser_err = 4_096_000;
    pulse(); first = vc1_dac;
    check(first == 1000, $sformatf("first feedforward sample %0d (4000 * 1/4 / 1024 ~ 1000)", first));
    repeat (20) pulse();
    check(vc1_dac >= 3990 && vc1_dac <= 4000, $sformatf("feedforward settles to %0d", vc1_dac));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
