// tb_target_generator: drives loop times (8 ticks apart, every fifth loop a
// 1 kHz update) and random baseline solutions and offsets, and compares each
// target with p0 + v (t - t0) + applied offset computed here in 64-bit
// integers. Checks that commands wait for the 1 kHz update, that a 2.2 um
// offset is applied as 0.5 um steps, the clip counter, and the latency
// (target_upd 2 cycles after t_valid).
module tb_target_generator;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, t_valid = 0, upd = 0, bl_valid = 0, off_valid = 0;
  tick_t t_loop = 0;
  baseline_t bl = '0;
  pos_t off_pm = 0, target_pm, off_applied;
  logic target_upd;
  vel_t vel;
  logic [15:0] off_clip_cnt;
  int checks = 0, failures = 0;

  target_generator dut (.clk, .rst_n, .t_valid, .upd, .t_loop, .bl_valid, .bl, .off_valid,
    .off_pm, .target_pm, .target_upd, .vel, .off_applied, .off_clip_cnt);

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

  // reference state
  longint a_t0 = 0, a_p0 = 0, a_v = 0, p_t0, p_p0, p_v, req = 0, app = 0;
  bit pend = 0;
  int clips = 0;

  task automatic send_bl(input longint t0, input longint p0, input longint v);
    @(posedge clk);
    bl_valid <= 1; bl.t0 <= tick_t'(t0); bl.p0 <= pos_t'(p0); bl.v <= vel_t'(v);
    @(posedge clk); bl_valid <= 0;
    p_t0 = t0; p_p0 = p0; p_v = v; pend = 1;
  endtask

  task automatic send_off(input longint o);
    @(posedge clk);
    off_valid <= 1; off_pm <= pos_t'(o);
    @(posedge clk); off_valid <= 0;
    req = o;
  endtask

  task automatic loop(input longint t, input bit u);
    longint d, expv;
    @(posedge clk); t_valid <= 1; upd <= u; t_loop <= tick_t'(t);
    @(posedge clk); t_valid <= 0; upd <= 0;
    if (u) begin
      if (pend) begin a_t0 = p_t0; a_p0 = p_p0; a_v = p_v; pend = 0; end
      d = req - app;
      if (d > 500_000) begin d = 500_000; clips++; end
      else if (d < -500_000) begin d = -500_000; clips++; end
      app += d;
    end
    #1 check(!target_upd, "target_upd too early");
    @(posedge clk); #1;
    check(target_upd, "target_upd 2 cycles after t_valid");
    expv = a_p0 + a_v * (t - a_t0) + app;
    check(target_pm == pos_t'(expv), $sformatf("t=%0d target %0d exp %0d", t, target_pm, expv));
    check(vel == vel_t'(a_v), "velocity");
  endtask

  longint t;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 1_000_000;
    // baseline at -6.92 mm/s: -173000 pm per tick
    send_bl(t, 40_000_000_000, -173_000);
    loop(t, 0); t += 8;                 // not yet applied
    loop(t, 1); t += 8;                 // applied here
    for (int i = 0; i < 10; i++) begin loop(t, (i % 5) == 4); t += 8; end
    // large offset: 2.2 um -> 0.5 um steps
    send_off(2_200_000);
    for (int i = 0; i < 30; i++) begin loop(t, (i % 5) == 0); t += 8; end
    check(off_applied == 2_200_000, "offset fully applied");
    check(off_clip_cnt == 16'(clips) && clips == 4, $sformatf("clip count %0d / %0d", off_clip_cnt, clips));
    // random commands
    for (int i = 0; i < 300; i++) begin
      if ($urandom_range(0, 9) == 0)
        send_bl(t - $urandom_range(0, 4000), $signed($urandom()) * 1000,
                $signed($urandom_range(0, 1_000_000)) - 500_000);
      if ($urandom_range(0, 5) == 0)
        send_off($signed($urandom_range(0, 4_000_000)) - 2_000_000);
      loop(t, (i % 5) == 0); t += 8;
    end
    check(off_clip_cnt == 16'(clips), "clip count after random run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
