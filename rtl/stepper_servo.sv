// stepper_servo: 100 Hz loop that moves the stepper (motor) cart so that the
// interface between the stepper cart and the optics cart stays centred.
//
// The error is the eddy current sensor 2 reading (its target is zero, as
// the published diagram marks that input as omitted). It drives a
// proportional-derivative controller: the published text calls this loop PD
// while the diagram labels the box PID, and the text is followed, so the
// integral gain is tied to zero. A feedforward kff * target_vel / 2^FRAC
// from the baseline-solution velocity is added so that the motor tracks the
// sidereal rate without a standing error. The output, clamped to
// +/-RATE_MAX, is a signed step-rate command (micro-steps per second) for the
// external motion controller and driver, which make the step pulses.
// The feedforward is saturated to 32 bits before it is added. gains.ki and
// gains.ff_shift are not used by this loop (a lint tool reports them).
// Timing: step_rate and step_upd follow stb by one cycle.
module stepper_servo
  import cdl_pkg::*;
#(
  parameter int RATE_MAX = 2_000_000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               stb,
  input  dac_t               eddy2,
  input  vel_t               target_vel,
  input  servo_gains_t       gains,
  output logic signed [31:0] step_rate,
  output logic               step_upd,
  output logic               sat
);

  typedef logic signed [65:0] wide_t;

  localparam wide_t FF_MAX = wide_t'(32'sh7FFF_FFFF);

  wide_t              ff_prod;
  logic signed [31:0] step_ff;

  always_comb begin
    ff_prod = (wide_t'(gains.kff) * wide_t'(target_vel)) >>> GAIN_FRAC;
    step_ff = (ff_prod > FF_MAX) ? 32'(FF_MAX) : (ff_prod < -FF_MAX) ? 32'(-FF_MAX) : 32'(ff_prod);
  end

  pid_ctrl #(.W_IN(16), .W_OUT(32)) u_pid (
    .clk, .rst_n, .stb,
    .err(eddy2), .kp(gains.kp), .ki('0), .kd(gains.kd),
    .d_shift(gains.d_shift), .ff(step_ff), .lim(31'(RATE_MAX)),
    .u(step_rate), .u_upd(step_upd), .sat
  );

endmodule
