// pzt_servo: the fast (5 kHz) loop that closes on the laser metrology.
//
// At each strobe the laser error e = target - measured is formed (target
// positive, measurement negative, as in the published servo diagram) and
// passed through a lag filter and a proportional gain:
//     I  <- I + e - I / 2^leak_shift      (leak_shift = 0: no leak)
//     y   = e + I / 2^lag_shift           (lag filter)
//     u   = kp * y / 2^8                  (kp is unsigned Q8.8)
// u is the commanded PZT optical-path offset, clamped to +/-RANGE (32 um);
// while it is clamped the integrator is frozen and `sat` is high. pzt_dac is
// the same value as a 16-bit unipolar code for the 0..120 V amplifier:
// code = (u + 2^25) / 2^10, so 32768 is the PZT centre.
// In slew mode (track_en = 0) or without a metrology signal the loop is
// open: the PZT is parked at its centre and the integrator cleared.
// Timing: laser_err, pzt_pm, pzt_dac and pzt_upd are registered one cycle
// after stb. pzt_dac is bits [25:10] of the offset sum, so a lint tool
// reports the other bits of dac_full as unused: that is the intended slice.
// The structure (lag filter then P at 5 kHz) follows the
// published diagram; the filter's exact form, the fixed-point formats and the
// anti-windup rule are this design's choices.
module pzt_servo
  import cdl_pkg::*;
#(
  parameter longint RANGE = PZT_RANGE_PM
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               stb,
  input  logic               track_en,
  input  logic               met_valid,
  input  pos_t               target_pm,
  input  pos_t               laser_pm,
  input  logic        [15:0] kp,
  input  logic         [4:0] lag_shift,
  input  logic         [4:0] leak_shift,
  output pos_t               laser_err,
  output logic signed [31:0] pzt_pm,
  output logic        [15:0] pzt_dac,
  output logic               pzt_upd,
  output logic               sat
);

  typedef logic signed [57:0] acc_t;
  typedef logic signed [75:0] prod_t;

  acc_t  integ, integ_next, y, e;
  prod_t u;
  logic  clamp_hi, clamp_lo;
  logic signed [31:0] u_sat;

  always_comb begin
    e          = acc_t'(target_pm) - acc_t'(laser_pm);
    y          = e + (integ >>> lag_shift);
    u          = (prod_t'(y) * prod_t'({1'b0, kp})) >>> 8;
    clamp_hi   = u > prod_t'(RANGE);
    clamp_lo   = u < -prod_t'(RANGE);
    u_sat      = clamp_hi ? 32'(RANGE) : clamp_lo ? -32'(RANGE) : 32'(u);
    integ_next = integ + e;
    if (leak_shift != '0) integ_next = integ_next - (integ >>> leak_shift);
  end

  logic [31:0] dac_full;
  assign dac_full = 32'(u_sat) + 32'(1 << 25);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      integ     <= '0;
      laser_err <= '0;
      pzt_pm    <= '0;
      pzt_dac   <= 16'h8000;
      pzt_upd   <= 1'b0;
      sat       <= 1'b0;
    end else begin
      pzt_upd <= stb;
      if (stb) begin
        laser_err <= pos_t'(e);
        if (!track_en || !met_valid) begin
          integ   <= '0;
          pzt_pm  <= '0;
          pzt_dac <= 16'h8000;
          sat     <= 1'b0;
        end else begin
          if (!(clamp_hi || clamp_lo)) integ <= integ_next;
          pzt_pm  <= u_sat;
          pzt_dac <= dac_full[25:10];
          sat     <= clamp_hi || clamp_lo;
        end
      end
    end
  end

endmodule
