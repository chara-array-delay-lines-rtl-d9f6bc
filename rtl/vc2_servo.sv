// vc2_servo: 1 kHz loop that keeps the optics cart centred on the stepper
// cart with voice coil 2, so that voice coil 1 never runs out of travel.
//
// As in the published servo diagram, the error is
//     vc2Err = eddy1 - eddy1_target
// (eddy current sensor 1, signed 16-bit ADC code), it drives a PID, and a
// feedforward vc2FF = kff * vc1_out / 2^FRAC from the voice-coil-1 drive is
// added to the PID output. The sum, clamped to +/-DAC_MAX, is the +/-10 V
// code of the voice-coil-2 amplifier. The feedforward is saturated to 32
// bits before it enters the PID's adder. The PID works with a 32-bit output
// so that PID term and feedforward are summed before the clamp; since that
// clamp is +/-DAC_MAX, the upper 16 bits of its output only repeat the sign
// and are left unused (a lint tool reports them). gains.ff_shift has no
// use in this loop (no feedforward filter is drawn here) and is ignored.
// Timing: vc2_dac and vc2_upd follow stb by one cycle. The published
// controller runs this loop in software on the cart's Linux computer.
module vc2_servo
  import cdl_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stb,
  input  dac_t         eddy1,
  input  dac_t         eddy1_target,
  input  dac_t         vc1_out,
  input  servo_gains_t gains,
  output dac_t         vc2_dac,
  output logic         vc2_upd,
  output logic         sat
);

  typedef logic signed [49:0] wide_t;

  localparam wide_t FF_MAX = wide_t'(32'sh7FFF_FFFF);

  logic signed [16:0] vc2_err;
  wide_t              ff_prod;
  logic signed [31:0] vc2_ff, u;

  always_comb begin
    vc2_err = 17'(eddy1) - 17'(eddy1_target);
    ff_prod = (wide_t'(gains.kff) * wide_t'(vc1_out)) >>> GAIN_FRAC;
    vc2_ff  = (ff_prod > FF_MAX) ? 32'(FF_MAX) : (ff_prod < -FF_MAX) ? 32'(-FF_MAX) : 32'(ff_prod);
  end

  pid_ctrl #(.W_IN(17), .W_OUT(32)) u_pid (
    .clk, .rst_n, .stb,
    .err(vc2_err), .kp(gains.kp), .ki(gains.ki), .kd(gains.kd),
    .d_shift(gains.d_shift), .ff(vc2_ff), .lim(31'(DAC_MAX)),
    .u, .u_upd(vc2_upd), .sat
  );

  assign vc2_dac = dac_t'(u);

endmodule
