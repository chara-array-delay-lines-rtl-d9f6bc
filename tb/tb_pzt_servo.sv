// tb_pzt_servo: compares the PZT loop with a model of its equations written
// here in 64-bit integers (lag filter, Q8.8 gain, +/-32 um clamp with
// frozen integrator, amplifier code), under random targets, measurements
// and gains, in and out of slew mode. Then closes the loop on an ideal PZT
// (measured = cart + PZT) and checks that a 5 um target step settles to
// within 5 % in 10 samples (2 ms at 5 kHz) and that the loop reports
// saturation for a 40 um step.
module tb_pzt_servo;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, stb = 0, track_en = 1, met_valid = 1;
  pos_t target_pm = 0, laser_pm = 0, laser_err;
  logic [15:0] kp = 16'd128, pzt_dac;
  logic [4:0] lag_shift = 0, leak_shift = 0;
  logic signed [31:0] pzt_pm;
  logic pzt_upd, sat;
  int checks = 0, failures = 0;

  pzt_servo dut (.clk, .rst_n, .stb, .track_en, .met_valid, .target_pm, .laser_pm, .kp,
    .lag_shift, .leak_shift, .laser_err, .pzt_pm, .pzt_dac, .pzt_upd, .sat);

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

  longint m_i = 0, m_pzt = 0;
  bit m_sat;
  localparam longint R = 32_000_000;

  task automatic step_model;
    longint e, y, u;
    e = longint'(target_pm) - longint'(laser_pm);
    if (!track_en || !met_valid) begin m_i = 0; m_pzt = 0; m_sat = 0; return; end
    y = e + (m_i >>> lag_shift);
    u = (y * longint'(kp)) >>> 8;
    m_sat = (u > R) || (u < -R);
    m_pzt = (u > R) ? R : (u < -R) ? -R : u;
    if (!m_sat) m_i = m_i + e - ((leak_shift != 0) ? (m_i >>> leak_shift) : 0);
  endtask

  task automatic pulse;
    @(posedge clk); stb <= 1;
    @(posedge clk); stb <= 0;
    step_model();
    #1;
    check(pzt_upd, "pzt_upd one cycle after stb");
    check(longint'(pzt_pm) == m_pzt, $sformatf("pzt %0d exp %0d", pzt_pm, m_pzt));
    check(sat == m_sat, "sat flag");
    check(longint'(pzt_dac) == ((m_pzt + 33554432) >>> 10), $sformatf("dac %0d", pzt_dac));
    check(laser_err == target_pm - laser_pm, "laser error");
  endtask

  int n;
  longint cart;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      target_pm = pos_t'($signed($urandom_range(0, 100_000_000)) - 50_000_000);
      laser_pm  = pos_t'($signed($urandom_range(0, 100_000_000)) - 50_000_000);
      if (i % 50 == 0) begin
        kp = 16'($urandom_range(1, 600));
        lag_shift = 5'($urandom_range(0, 8));
        leak_shift = ($urandom_range(0, 1) == 1) ? 5'($urandom_range(4, 12)) : 5'd0;
      end
      track_en  = ($urandom_range(0, 19) != 0);
      met_valid = ($urandom_range(0, 29) != 0);
      pulse();
    end
    // closed loop on an ideal PZT
    track_en = 1; met_valid = 1; kp = 128; lag_shift = 0; leak_shift = 0;
    track_en = 0; pulse(); track_en = 1;   // slew mode clears the integrator
    cart = 7_000_000; target_pm = 7_000_000; laser_pm = 7_000_000;
    repeat (20) begin pulse(); laser_pm = pos_t'(cart + pzt_pm); end
    target_pm = 12_000_000;
    n = 0;
    repeat (10) begin pulse(); laser_pm = pos_t'(cart + pzt_pm); n++; end
    check(laser_pm > 11_750_000 && laser_pm < 12_250_000,
          $sformatf("5 um step settled to %0d after %0d samples", laser_pm, n));
    target_pm = 52_000_000;
    repeat (30) begin pulse(); laser_pm = pos_t'(cart + pzt_pm); end
    check(sat && pzt_pm == 32_000_000, "saturated on 45 um step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
