// metrology_phase_meter: heterodyne fringe counter for the cart metrology.
//
// The laser metrology delivers two 2 MHz square waves: a reference beat and
// a measurement beat whose phase advances by one cycle for every FRINGE_PM
// of optical path change. This block samples both with the 100 MHz system
// clock (two-flop synchronizers, rising-edge detect) and keeps
//   N = (measurement edges) - (reference edges)     (whole cycles, signed)
//   d = system clocks since the last reference edge (0 .. PHASE_STEPS-1).
// At each measurement edge the phase difference in 1/PHASE_STEPS cycles is
//   count = N * PHASE_STEPS - d,
// and the path is count * FRINGE_PM / PHASE_STEPS (26.38 nm per count at the
// defaults), relative to the count held when `home` was last pulsed. The
// result is therefore absolute after homing, not incremental per sample.
// A new value appears on pos_pm (pos_upd high for one cycle) 2 cycles after
// the measurement edge is detected, i.e. about 2 MHz plus Doppler.
// met_valid drops when no measurement edge arrived for LOS_CLKS cycles.
// The counting method, the 1/50-cycle resolution and the loss-of-signal rule
// are this design's choices; the reference period is assumed to be exactly
// PHASE_STEPS system clocks (both derive from the same master clock).
module metrology_phase_meter
  import cdl_pkg::*;
#(
  parameter int     STEPS   = int'(PHASE_STEPS),
  parameter longint STEP_PM = COUNT_PM,
  parameter int     LOS_CLKS = 200
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ref_sq,
  input  logic meas_sq,
  input  logic home,
  output pos_t pos_pm,
  output logic pos_upd,
  output logic met_valid
);

  logic [2:0] ref_s, meas_s;
  logic       ref_rise, meas_rise;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ref_s  <= '0;
      meas_s <= '0;
    end else begin
      ref_s  <= {ref_s[1:0], ref_sq};
      meas_s <= {meas_s[1:0], meas_sq};
    end
  end
  assign ref_rise  = ref_s[1]  & ~ref_s[2];
  assign meas_rise = meas_s[1] & ~meas_s[2];

  typedef logic signed [39:0] cnt_t;

  logic signed [35:0] n_q, n_next;
  logic         [7:0] d_q;
  logic         [7:0] d_now;
  logic         [8:0] los_q;
  cnt_t               count_q, home_q, count_now;
  logic               cnt_upd;
  cnt_t               rel;

  assign rel = count_q - home_q;

  always_comb begin
    n_next = n_q;
    if (meas_rise && !ref_rise) n_next = n_q + 36'sd1;
    if (ref_rise && !meas_rise) n_next = n_q - 36'sd1;
    d_now     = ref_rise ? 8'd0 : d_q;
    count_now = cnt_t'(n_next) * cnt_t'(STEPS) - cnt_t'({1'b0, d_now});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_q       <= '0;
      d_q       <= '0;
      los_q     <= '0;
      count_q   <= '0;
      home_q    <= '0;
      cnt_upd   <= 1'b0;
      pos_pm    <= '0;
      pos_upd   <= 1'b0;
      met_valid <= 1'b0;
    end else begin
      n_q     <= n_next;
      d_q     <= ref_rise ? 8'd1 : (d_q == 8'hFF ? d_q : d_q + 1'b1);
      cnt_upd <= meas_rise;
      if (meas_rise) count_q <= count_now;
      if (home)      home_q  <= count_q;
      if (meas_rise) los_q <= '0;
      else if (los_q != 9'h1FF) los_q <= los_q + 1'b1;
      met_valid <= (los_q < 9'(LOS_CLKS));
      pos_upd   <= cnt_upd;
      if (cnt_upd) pos_pm <= pos_t'(rel) * pos_t'(STEP_PM);
    end
  end

endmodule
