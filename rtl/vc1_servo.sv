// vc1_servo: 1 kHz loop that keeps the PZT near the middle of its range by
// moving the optics cart with voice coil 1.
//
// Following the published servo diagram, the loop error is
//     vc1Err = pzt_target - pzt_pos + vc1FF
// where vc1FF is the laser error scaled by kff and low-passed
// (lp <- lp + (kff*laser_err/2^FRAC - lp) / 2^ff_shift). The PZT position is
// the command the PZT servo is applying (there is no separate PZT sensor).
// The feedforward term is saturated at +/-2^46 pm before the filter, so the
// error sum cannot wrap. vc1Err drives a PID (pid_ctrl) whose 16-bit output,
// clamped to +/-DAC_MAX, is the
// +/-10 V voice-coil amplifier code. Gains are signed, so the actuator's sign
// convention is set by the gains.
// gains.ff_shift sets the feedforward low-pass; all other fields of gains
// are used as in pid_ctrl. Timing: vc1_dac and vc1_upd follow stb by one cycle. The published
// controller runs this loop in software on the cart's Linux computer; here
// it is logic in the same clock domain as the PZT loop.
module vc1_servo
  import cdl_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               stb,
  input  logic signed [31:0] pzt_target,
  input  logic signed [31:0] pzt_pos,
  input  pos_t               laser_err,
  input  servo_gains_t       gains,
  output dac_t               vc1_dac,
  output logic               vc1_upd,
  output logic               sat
);

  typedef logic signed [81:0] wide_t;
  typedef logic signed [47:0] e_t;

  localparam wide_t FF_MAX = wide_t'(1) <<< 46;

  e_t    lp, lp_new, ff_in, vc1_err;
  wide_t ff_prod;

  always_comb begin
    ff_prod = (wide_t'(gains.kff) * wide_t'(laser_err)) >>> GAIN_FRAC;
    // saturate at +/-2^46 pm so that the sum below cannot wrap
    ff_in   = (ff_prod > FF_MAX) ? e_t'(FF_MAX) : (ff_prod < -FF_MAX) ? e_t'(-FF_MAX) : e_t'(ff_prod);
    lp_new  = lp + ((ff_in - lp) >>> gains.ff_shift);
    vc1_err = e_t'(pzt_target) - e_t'(pzt_pos) + lp_new;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) lp <= '0;
    else if (stb) lp <= lp_new;
  end

  pid_ctrl #(.W_IN(48), .W_OUT(16)) u_pid (
    .clk, .rst_n, .stb,
    .err(vc1_err), .kp(gains.kp), .ki(gains.ki), .kd(gains.kd),
    .d_shift(gains.d_shift), .ff('0), .lim(15'(DAC_MAX)),
    .u(vc1_dac), .u_upd(vc1_upd), .sat
  );

endmodule
