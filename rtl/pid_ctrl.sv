// pid_ctrl: sampled PID controller shared by the voice-coil and stepper loops.
//
// On each stb, with error e (signed W_IN bits):
//     I  <- I + e                               (frozen while saturated)
//     D  <- D + ((e - e_prev) - D) / 2^d_shift  (low-pass on the derivative)
//     u   = (kp*e + ki*I + kd*D) / 2^FRAC + ff, clamped to +/-lim
// Gains are signed with FRAC fraction bits; ff is a feedforward term already
// in output units, added before the clamp so that the clamp bounds the
// actuator command. d_shift = 0 gives an unfiltered difference. The first
// sample after reset uses e_prev = 0. u and u_upd are registered one cycle
// after stb; `sat` marks a clamped output. The low-pass on the derivative
// follows the published tuning notes; the parallel form, rectangular
// integration and anti-windup are this design's choices.
module pid_ctrl
  import cdl_pkg::*;
#(
  parameter int W_IN  = 48,
  parameter int W_OUT = 32,
  parameter int FRAC  = GAIN_FRAC
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    stb,
  input  logic signed [W_IN-1:0]  err,
  input  gain_t                   kp,
  input  gain_t                   ki,
  input  gain_t                   kd,
  input  logic              [3:0] d_shift,
  input  logic signed [W_OUT-1:0] ff,
  input  logic        [W_OUT-2:0] lim,
  output logic signed [W_OUT-1:0] u,
  output logic                    u_upd,
  output logic                    sat
);

  localparam int WI = W_IN + 16;         // integrator
  localparam int WP = WI + 34;           // products and their sum

  typedef logic signed [WI-1:0] int_t;
  typedef logic signed [WP-1:0] wide_t;

  int_t  integ, dfilt, e_prev, raw_d, dnew;
  wide_t acc, lim_w;
  logic  hi, lo;

  always_comb begin
    raw_d = int_t'(err) - e_prev;
    dnew  = dfilt + ((raw_d - dfilt) >>> d_shift);
    acc   = (wide_t'(kp) * wide_t'(err) + wide_t'(ki) * wide_t'(integ)
             + wide_t'(kd) * wide_t'(dnew)) >>> FRAC;
    acc   = acc + wide_t'(ff);
    lim_w = wide_t'({1'b0, lim});
    hi    = acc > lim_w;
    lo    = acc < -lim_w;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      integ  <= '0;
      dfilt  <= '0;
      e_prev <= '0;
      u      <= '0;
      u_upd  <= 1'b0;
      sat    <= 1'b0;
    end else begin
      u_upd <= stb;
      if (stb) begin
        e_prev <= int_t'(err);
        dfilt  <= dnew;
        if (!(hi || lo)) integ <= integ + int_t'(err);
        u   <= hi ? W_OUT'(lim_w) : lo ? W_OUT'(-lim_w) : W_OUT'(acc);
        sat <= hi || lo;
      end
    end
  end

endmodule
