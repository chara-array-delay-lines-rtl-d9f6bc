// ople_delay_line_ctrl: real-time controller of one delay-line cart.
//
// A delay-line cart carries a cat's-eye retro-reflector whose position sets
// the optical delay of one telescope beam. Its position is moved by four
// nested actuators -- a PZT under the secondary mirror (fast, +/-32 um),
// voice coil 1 moving the optics cart, voice coil 2 moving the optics cart
// against the stepper cart, and a stepper motor (coarse) -- and measured by
// a heterodyne laser metrology and two eddy current sensors. This module
// holds the whole control chain of one cart:
//
//   master_timebase       16 MHz + 1 Hz master clock -> 25 us tick of the day
//   loop_scheduler        5 kHz / 1 kHz / 100 Hz strobes from the 100 MHz clock
//   tick_quantizer        tick sampled per 5 kHz loop, rounded to a multiple of 8
//   target_generator      p0 + v (t - t0) + fringe-tracker offset, 1 kHz commands
//   metrology_phase_meter 2 MHz reference/measurement beats -> optical path
//   pzt_servo             5 kHz lag + P loop on the laser error -> PZT code
//   vc1_servo             1 kHz PID keeping the PZT centred (+ laser-error FF)
//   vc2_servo             1 kHz PID on eddy sensor 1 (+ VC1 feedforward)
//   stepper_servo         100 Hz PD on eddy sensor 2 (+ velocity feedforward)
//   telemetry_framer      1 kHz (or 5 kHz) records as a byte stream
//
// One 5 kHz loop runs as a pipeline of single-cycle steps after loop_stb:
// +1 time stamp, +3 target, +4 PZT command, +5 VC1, +6 VC2 / stepper,
// +7 telemetry capture. Commands (baseline solution, fringe-tracker offset,
// clock sync, configuration) enter as parallel ports: the network interfaces
// that carry them are outside this module, as are the DACs, ADCs, amplifiers
// and motion controller whose codes appear on the ports. In MODE_SLEW the PZT
// loop is open and the voice coils and motor carry the cart (the published
// large-slew mode). In the published system the last three loops run in
// software on a Linux computer; here all loops share one clock domain.
// Four sub-block outputs are not used at this level and stay unconnected in
// effect: tick_stb (the loops sample the tick instead), pos_upd (the PZT loop
// reads the latest position at its own rate), step_upd and off_applied
// (the offset is already part of target_pm). Lint tools report them.
module ople_delay_line_ctrl
  import cdl_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // master clock
  input  logic               mclk_16m,
  input  logic               pps_1hz,
  input  logic               sync_req,
  input  tick_t              sync_tick,
  // metrology
  input  logic               ref_sq,
  input  logic               meas_sq,
  input  logic               home,
  // commands
  input  ctrl_cfg_t          cfg,
  input  logic               bl_valid,
  input  baseline_t          bl,
  input  logic               off_valid,
  input  pos_t               off_pm,
  // sensors
  input  dac_t               eddy1,
  input  dac_t               eddy2,
  // actuators
  output logic        [15:0] pzt_dac,
  output logic signed [31:0] pzt_pm,
  output dac_t               vc1_dac,
  output dac_t               vc2_dac,
  output logic signed [31:0] step_rate,
  // telemetry byte stream
  output logic         [7:0] tx_data,
  output logic               tx_valid,
  output logic               tx_last,
  input  logic               tx_ready,
  // status
  output tick_t              tick,
  output logic               synced,
  output logic               pps_err,
  output logic               met_valid,
  output pos_t               laser_pm,
  output pos_t               target_pm,
  output pos_t               laser_err,
  output logic               pzt_upd,
  output logic               pzt_sat,
  output logic        [15:0] jitter_cnt,
  output logic        [15:0] off_clip_cnt,
  output logic        [15:0] drop_cnt
);

  // ------------------------------------------------------------ timing
  logic tick_stb;
  logic loop_stb, target_stb, stepper_stb;
  tick_t t_loop;
  logic  t_valid;

  master_timebase u_time (
    .clk, .rst_n, .mclk_16m, .pps_1hz, .sync_req, .sync_tick,
    .tick, .tick_stb, .synced, .pps_err
  );

  loop_scheduler u_sched (
    .clk, .rst_n, .loop_stb, .target_stb, .stepper_stb
  );

  tick_quantizer u_tq (
    .clk, .rst_n, .loop_stb, .tick, .round_en(cfg.round_en),
    .t_loop, .t_valid, .jitter_cnt
  );

  // 1 kHz / 100 Hz flags travel with the loop through the pipeline
  logic [3:0] k1_pipe, hz_pipe;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k1_pipe <= '0;
      hz_pipe <= '0;
    end else begin
      k1_pipe <= {k1_pipe[2:0], target_stb};
      hz_pipe <= {hz_pipe[2:0], stepper_stb};
    end
  end

  // ------------------------------------------------------------ target
  logic target_upd;
  vel_t vel;
  pos_t off_applied;

  target_generator u_tgt (
    .clk, .rst_n, .t_valid, .upd(k1_pipe[0]), .t_loop,
    .bl_valid, .bl, .off_valid, .off_pm,
    .target_pm, .target_upd, .vel, .off_applied, .off_clip_cnt
  );

  // ------------------------------------------------------------ metrology
  logic pos_upd;

  metrology_phase_meter u_met (
    .clk, .rst_n, .ref_sq, .meas_sq, .home,
    .pos_pm(laser_pm), .pos_upd, .met_valid
  );

  // ------------------------------------------------------------ servos
  pzt_servo u_pzt (
    .clk, .rst_n, .stb(target_upd), .track_en(cfg.mode == MODE_TRACK),
    .met_valid, .target_pm, .laser_pm,
    .kp(cfg.pzt_kp), .lag_shift(cfg.pzt_lag_shift), .leak_shift(cfg.pzt_leak_shift),
    .laser_err, .pzt_pm, .pzt_dac, .pzt_upd, .sat(pzt_sat)
  );

  logic vc1_upd, vc1_sat, vc2_upd, vc2_sat, step_upd, step_sat;

  vc1_servo u_vc1 (
    .clk, .rst_n, .stb(pzt_upd && k1_pipe[3]),
    .pzt_target(cfg.pzt_target), .pzt_pos(pzt_pm), .laser_err,
    .gains(cfg.vc1), .vc1_dac, .vc1_upd, .sat(vc1_sat)
  );

  vc2_servo u_vc2 (
    .clk, .rst_n, .stb(vc1_upd),
    .eddy1, .eddy1_target(cfg.eddy1_target), .vc1_out(vc1_dac),
    .gains(cfg.vc2), .vc2_dac, .vc2_upd, .sat(vc2_sat)
  );

  logic hz_d;
  always_ff @(posedge clk) begin
    if (!rst_n) hz_d <= 1'b0;
    else        hz_d <= pzt_upd && hz_pipe[3];
  end

  stepper_servo u_step (
    .clk, .rst_n, .stb(hz_d), .eddy2, .target_vel(vel),
    .gains(cfg.stp), .step_rate, .step_upd, .sat(step_sat)
  );

  // ------------------------------------------------------------ telemetry
  tlm_rec_t rec;
  logic     tlm_stb, pzt_upd_d, vc2_upd_d;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pzt_upd_d <= 1'b0;
      vc2_upd_d <= 1'b0;
    end else begin
      pzt_upd_d <= pzt_upd;
      vc2_upd_d <= vc2_upd;
    end
  end

  function automatic logic [31:0] clamp32(input pos_t v);
    if (v > pos_t'(32'sh7FFF_FFFF))  return 32'h7FFF_FFFF;
    if (v < -pos_t'(32'sh7FFF_FFFF)) return 32'h8000_0001;
    return 32'(v);
  endfunction

  always_comb begin
    rec           = '0;
    rec.t         = t_loop;
    rec.target    = target_pm;
    rec.laser     = laser_pm;
    rec.err       = clamp32(laser_err);
    rec.pzt       = pzt_pm;
    rec.vc1       = vc1_dac;
    rec.vc2       = vc2_dac;
    rec.step_rate = step_rate;
    rec.flags     = {pps_err, synced, met_valid, pzt_sat, vc1_sat, vc2_sat,
                     step_sat, cfg.mode == MODE_TRACK};
  end

  // 1 kHz records are taken after the voice-coil loops have updated; fast
  // records right after each PZT update.
  assign tlm_stb = cfg.tlm_fast ? pzt_upd_d : vc2_upd_d;

  telemetry_framer u_tlm (
    .clk, .rst_n, .sample_stb(tlm_stb), .rec,
    .tx_data, .tx_valid, .tx_last, .tx_ready, .drop_cnt
  );

endmodule
