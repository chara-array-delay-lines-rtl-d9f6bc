// tb_ople_delay_line_ctrl: end-to-end test of one cart controller at its
// default (full) size, closed around a model of the cart.
//
// Plant model (real arithmetic, updated every system clock):
//   * PZT, voice coil 1 and voice coil 2 are position actuators that follow
//     their commands with a 1 us lag and a 0.2 m/s slew limit:
//     PZT = pzt_pm, VC1 = 91 553 pm per code (+/-3 mm), VC2 = 183 106 pm per
//     code (+/-6 mm). The stepper integrates step_rate at 0.1 um per step.
//   * optical path L = stepper + VC2 + VC1 + PZT.
//   * metrology: an exact 2 MHz reference square wave and a measurement
//     square wave of phase 2 MHz * t + L / 1.319 um.
//   * eddy current sensor 1 reads VC1's position in VC1 codes, sensor 2
//     reads VC2's position in VC2 codes.
//   * the 16 MHz master clock runs 0.4 % slow so that the 25 us tick drifts
//     against the 5 kHz loop and the sampled tick sometimes steps by 7.
// Scenario: home, clock sync at a 1 Hz edge, slew to a moving baseline
// solution with the PZT loop open, switch to tracking with a 40 um jump of
// the target (saturating the PZT), an early 1 Hz edge (clock error), a
// fringe-tracker offset carried out in 0.5 um steps, a re-sync, fast
// telemetry with the link stalled (dropped records) and, for 2 ms, the
// round-to-8 fix switched off (raw loop times), settled tracking, and
// a loss of the metrology signal.
// Every telemetry frame is decoded and checked (sync byte, checksum,
// sequence number, rounded time, target value). Each mechanism is counted
// when it happens; a mechanism that never happens is a failure.
module tb_ople_delay_line_ctrl;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;

  logic clk = 0, rst_n = 0;
  logic mclk_16m = 0, pps_1hz = 0, sync_req = 0;
  tick_t sync_tick = '0;
  logic ref_sq = 0, meas_sq = 0, home = 0;
  ctrl_cfg_t cfg = '0;
  logic bl_valid = 0, off_valid = 0, tx_ready = 1;
  baseline_t bl = '0;
  pos_t off_pm = '0;
  dac_t eddy1 = '0, eddy2 = '0;
  logic [15:0] pzt_dac;
  logic signed [31:0] pzt_pm, step_rate;
  dac_t vc1_dac, vc2_dac;
  logic [7:0] tx_data;
  logic tx_valid, tx_last;
  tick_t tick;
  logic synced, pps_err, met_valid, pzt_upd, pzt_sat;
  pos_t laser_pm, target_pm, laser_err;
  logic [15:0] jitter_cnt, off_clip_cnt, drop_cnt;

  ople_delay_line_ctrl dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  always #5 clk = ~clk;
  always #31.375 mclk_16m = ~mclk_16m;   // 15.94 MHz: 0.4 % slow

  initial begin
    #100_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- plant
  localparam real VC1_PM = 91553.0, VC2_PM = 183106.0, STEP_PM = 100000.0;
  real p_pzt = 0, p_vc1 = 0, p_vc2 = 0, p_stp = 0, path = 0;
  bit  los = 0;

  function automatic real follow(input real p, input real cmd);
    real d;
    d = (cmd - p) * 0.01;
    if (d > 2000.0) d = 2000.0;
    if (d < -2000.0) d = -2000.0;
    return p + d;
  endfunction

  function automatic real frac(input real x);
    return x - $floor(x);
  endfunction

  always @(negedge clk) begin
    real rp;
    p_pzt = follow(p_pzt, real'(pzt_pm));
    p_vc1 = follow(p_vc1, real'(vc1_dac) * VC1_PM);
    p_vc2 = follow(p_vc2, real'(vc2_dac) * VC2_PM);
    p_stp = p_stp + real'(step_rate) * STEP_PM * 1.0e-8;
    path  = p_stp + p_vc2 + p_vc1 + p_pzt;
    rp = $realtime * 0.002;
    ref_sq  <= frac(rp) < 0.5;
    meas_sq <= los ? 1'b0 : (frac(rp + path / 1319000.0) < 0.5);
    eddy1   <= dac_t'($rtoi(p_vc1 / VC1_PM));
    eddy2   <= dac_t'($rtoi(p_vc2 / VC2_PM));
  end

  // ------------------------------------------------------------- mechanisms
  int n_tick = 0, n_sync = 0, n_pps_err = 0, n_pps_clr = 0, n_jitter = 0;
  int n_round = 0, n_target_ok = 0, n_clip = 0, n_pzt_upd = 0, n_pzt_sat = 0;
  int n_slew_park = 0, n_track_ok = 0, n_track_n = 0, n_vc1 = 0, n_vc2 = 0;
  int n_step = 0, n_step_ff = 0, n_frame = 0, n_drop = 0, n_los = 0, n_los_park = 0;
  int n_pzt_centred = 0, n_raw = 0;
  bit chk_round = 1;       // cfg.round_en, but switched off before it and on after it
  tick_t tick_prev = '0;
  logic synced_prev = 0, pps_err_prev = 0, met_prev = 0;
  logic [15:0] jit_prev = 0, clip_prev = 0, drop_prev = 0;
  dac_t vc1_prev = 0, vc2_prev = 0;
  logic signed [31:0] step_prev = 0;
  bit settled = 0;

  always @(posedge clk) if (rst_n) begin
    if (tick != tick_prev) n_tick++;
    if (synced && !synced_prev) n_sync++;
    if (pps_err && !pps_err_prev) n_pps_err++;
    if (!pps_err && pps_err_prev) n_pps_clr++;
    if (jitter_cnt != jit_prev) n_jitter++;
    if (off_clip_cnt != clip_prev) n_clip++;
    if (drop_cnt != drop_prev) n_drop++;
    if (!met_valid && met_prev) n_los++;
    if (vc1_dac != vc1_prev) n_vc1++;
    if (vc2_dac != vc2_prev) n_vc2++;
    if (step_rate != step_prev) n_step++;
    if (pzt_upd) begin
      n_pzt_upd++;
      if (pzt_sat) n_pzt_sat++;
      if (cfg.mode == MODE_SLEW && met_valid) begin
        check(pzt_dac == 16'h8000 && pzt_pm == 0, "PZT parked in slew mode");
        n_slew_park++;
      end
      if (!met_valid) begin
        check(pzt_dac == 16'h8000, "PZT parked without metrology");
        n_los_park++;
      end
      if (settled && met_valid && cfg.mode == MODE_TRACK) begin
        n_track_n++;
        if (laser_err < 300_000 && laser_err > -300_000) n_track_ok++;
        if (pzt_pm < 5_000_000 && pzt_pm > -5_000_000) n_pzt_centred++;
        // stepper carries the sidereal rate (0.4 steps/s per pm/tick) within 50 %
        if (step_rate > (bl.v * 2) / 10 && step_rate < (bl.v * 6) / 10) n_step_ff++;
      end
    end
    tick_prev = tick; synced_prev = synced; pps_err_prev = pps_err; met_prev = met_valid;
    jit_prev = jitter_cnt; clip_prev = off_clip_cnt; drop_prev = drop_cnt;
    vc1_prev = vc1_dac; vc2_prev = vc2_dac; step_prev = step_rate;
  end

  // ------------------------------------------------------------- telemetry
  int pos = 0;
  logic [7:0] sum = 0;
  logic [$bits(tlm_rec_t)-1:0] got;
  logic [15:0] seq_exp = 0;
  bit first_frame = 1;
  pos_t off_now = 0;       // offset the tb has commanded and waited out
  bit   off_stable = 1;
  longint n_seq_gap = 0;

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (pos == 0) begin
      check(tx_data == 8'hA5, "sync byte");
      sum = 0; pos = 1;
    end else if (pos <= TLM_BYTES) begin
      got = {got[$bits(tlm_rec_t)-9:0], tx_data};
      sum += tx_data; pos++;
    end else begin
      tlm_rec_t r;
      r = tlm_rec_t'(got);
      check(tx_last, "tx_last on checksum");
      check(tx_data == sum, "frame checksum");
      if (!first_frame) begin
        if (r.seq != seq_exp) n_seq_gap += longint'(r.seq - seq_exp);
      end
      first_frame = 0;
      seq_exp = r.seq + 1'b1;
      if (chk_round) begin
        check(r.t[2:0] == 3'b000, $sformatf("record time %0d not a multiple of 8", r.t));
        n_round++;
      end else if (r.t[2:0] != 3'b000) n_raw++;
      if (off_stable && bl.v != 0 && r.flags[6]) begin
        longint expv;
        expv = longint'(bl.p0) + longint'(bl.v) * (longint'(r.t) - longint'(bl.t0)) + longint'(off_now);
        check(longint'(r.target) == expv,
              $sformatf("record target %0d expected %0d", r.target, expv));
        n_target_ok++;
      end
      n_frame++;
      pos = 0;
    end
  end

  // ------------------------------------------------------------- scenario
  task automatic wait_us(input int us);
    repeat (us) #1000;
    @(negedge clk);
  endtask

  task automatic pps_pulse;
    @(negedge clk) pps_1hz = 1;
    wait_us(10);
    pps_1hz = 0;
  endtask

  task automatic send_baseline(input pos_t p0, input vel_t v);
    @(negedge clk);
    bl.t0 = tick; bl.p0 = p0; bl.v = v;
    off_now = 0;
    bl_valid = 1;
    @(negedge clk) bl_valid = 0;
  endtask

  // samples of |laser - target| during a window, for the slew check
  real slew_err;

  initial begin
    cfg.mode          = MODE_SLEW;
    cfg.round_en      = 1;
    cfg.tlm_fast      = 0;
    cfg.pzt_kp        = 16'd192;            // 0.75
    cfg.pzt_lag_shift = 5'd1;
    cfg.pzt_leak_shift = 5'd0;
    cfg.pzt_target    = 0;
    cfg.eddy1_target  = 0;
    cfg.vc1.ki        = -30;                // 16 % of the PZT offset per ms
    cfg.vc1.kff       = -(32'sd1 << 24);    // laser error feedforward, gain 1
    cfg.vc1.ff_shift  = 4'd2;
    cfg.vc2.ki        = 83886;              // 0.005 code per code per ms
    cfg.vc2.kff       = 335544;             // 0.02 of the VC1 drive
    cfg.stp.kp        = 153_600_000;        // 9.2 steps/s per code
    cfg.stp.kd        = 0;
    cfg.stp.kff       = 6_710_886;          // 0.4 steps/s per pm/tick

    repeat (10) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait_us(5);
    check(met_valid, "metrology signal present");
    home = 1; @(negedge clk) home = 0;
    wait_us(2);
    check(laser_pm < 30_000 && laser_pm > -30_000, $sformatf("laser after homing %0d", laser_pm));

    // clock sync at the next 1 Hz edge
    sync_tick = 32'd36_000_000;             // 15:00:00 UTC
    sync_req = 1; @(negedge clk) sync_req = 0;
    wait_us(90);
    pps_pulse();
    wait_us(2);
    check(synced, "synced at the 1 Hz edge");
    check(tick - 32'd36_000_000 < 2, $sformatf("tick loaded: %0d", tick));

    // slew: PZT loop open, carts follow a moving target
    send_baseline(pos_t'(30_000_000), vel_t'(25_000));   // 30 um, 1 mm/s
    wait_us(12_000);
    slew_err = real'(laser_pm - target_pm);
    check(slew_err < 10.0e6 && slew_err > -10.0e6, $sformatf("slew error %0.0f pm", slew_err));

    // tracking, with a 40 um target jump that saturates the PZT
    cfg.mode = MODE_TRACK;
    send_baseline(target_pm + pos_t'(40_000_000), vel_t'(25_000));
    wait_us(3_000);

    // a 1 Hz edge far too early: the clock is flagged as out of sync
    pps_pulse();
    wait_us(5);
    check(pps_err, "early 1 Hz edge flagged");

    // fringe-tracker offset of 2 um, carried out in 0.5 um steps
    off_stable = 0;
    @(negedge clk) off_pm = pos_t'(2_000_000); off_valid = 1;
    @(negedge clk) off_valid = 0;
    wait_us(6_000);
    off_now = pos_t'(2_000_000);
    off_stable = 1;

    // re-sync the clock 490 us (about 20 ticks) before the next edge, loading
    // a time 3 ticks ahead, as a corrected clock would: the loop then samples
    // the tick at a different phase within its 8-tick period
    @(negedge clk) sync_tick = tick + 32'd23; sync_req = 1;
    @(negedge clk) sync_req = 0;
    wait_us(490);
    pps_pulse();
    wait_us(5);
    check(!pps_err && synced, "re-sync clears the clock error");

    // fast (5 kHz) telemetry with the link stalled for 1 ms; the first 2 ms
    // also run without the round-to-8 fix, so raw loop times are recorded
    cfg.tlm_fast = 1;
    chk_round = 0;
    cfg.round_en = 0;
    wait_us(2_000);
    cfg.round_en = 1;
    wait_us(1);
    chk_round = 1;
    tx_ready = 0;
    wait_us(1_000);
    tx_ready = 1;
    wait_us(2_000);
    cfg.tlm_fast = 0;

    // settled tracking
    wait_us(15_000);
    settled = 1;
    wait_us(10_000);
    settled = 0;

    // loss of the metrology signal
    los = 1;
    wait_us(500);
    los = 0;
    wait_us(20);

    // ---------------------------------------------------------- summary
    check(n_seq_gap == longint'(drop_cnt),
          $sformatf("sequence gaps %0d equal drop count %0d", n_seq_gap, drop_cnt));
    check(n_track_ok * 100 >= n_track_n * 98,
          $sformatf("tracking within 0.3 um: %0d of %0d loops", n_track_ok, n_track_n));
    check(n_pzt_centred * 100 >= n_track_n * 90,
          $sformatf("PZT kept within 5 um of centre: %0d of %0d loops", n_pzt_centred, n_track_n));
    check(n_step_ff * 100 >= n_track_n * 90,
          $sformatf("stepper at sidereal rate: %0d of %0d loops", n_step_ff, n_track_n));

    $display("mechanisms: ticks=%0d sync=%0d pps_err=%0d pps_clear=%0d jitter=%0d round=%0d raw=%0d",
             n_tick, n_sync, n_pps_err, n_pps_clr, n_jitter, n_round, n_raw);
    $display("  target_ok=%0d offset_clip=%0d pzt_upd=%0d pzt_sat=%0d slew_park=%0d track=%0d/%0d",
             n_target_ok, n_clip, n_pzt_upd, n_pzt_sat, n_slew_park, n_track_ok, n_track_n);
    $display("  vc1=%0d vc2=%0d step=%0d step_ff=%0d frames=%0d drops=%0d los=%0d los_park=%0d",
             n_vc1, n_vc2, n_step, n_step_ff, n_frame, n_drop, n_los, n_los_park);
    check(n_tick > 0, "mechanism: 25 us tick");
    check(n_sync > 0, "mechanism: clock sync at 1 Hz edge");
    check(n_pps_err > 0, "mechanism: clock error detection");
    check(n_pps_clr > 0, "mechanism: clock error cleared by re-sync");
    check(n_jitter > 0, "mechanism: loop/tick jitter counted");
    check(n_round > 0, "mechanism: loop time rounded to 8 ticks");
    check(n_raw > 0, "mechanism: raw loop time with rounding switched off");
    check(n_target_ok > 0, "mechanism: target from baseline solution and offset");
    check(n_clip > 0, "mechanism: offset applied in 0.5 um steps");
    check(n_pzt_upd > 0, "mechanism: 5 kHz PZT loop");
    check(n_pzt_sat > 0, "mechanism: PZT range limit");
    check(n_slew_park > 0, "mechanism: slew mode with PZT loop off");
    check(n_track_n > 0, "mechanism: tracking");
    check(n_vc1 > 0, "mechanism: VC1 loop");
    check(n_vc2 > 0, "mechanism: VC2 loop");
    check(n_step > 0, "mechanism: stepper loop");
    check(n_step_ff > 0, "mechanism: stepper velocity feedforward");
    check(n_frame > 0, "mechanism: telemetry frames");
    check(n_drop > 0, "mechanism: telemetry drop on stalled link");
    check(n_los > 0, "mechanism: metrology loss of signal");
    check(n_los_park > 0, "mechanism: PZT parked without metrology");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
