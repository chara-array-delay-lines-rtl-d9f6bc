// target_generator: commanded cart position for every 5 kHz servo loop.
//
// The supervisor sends a baseline solution (time t0, position p0, velocity v
// in pm per 25 us tick) describing the sidereal delay, and the fringe
// tracker sends an optical-path offset. For every loop time t_loop the block
// produces
//     target = p0 + v * (t_loop - t0) + off_applied.
// New commands may arrive in any cycle but are taken only at the 1 kHz target
// update (t_valid together with upd): a new baseline solution replaces the
// old one there, and the applied offset moves toward the requested offset by
// at most STEP_MAX (0.5 um) per update, so a large offset is carried out as a
// staircase of 0.5 um steps. off_clip_cnt counts updates where the step was
// limited. Between updates the same solution is evaluated at each 5 kHz loop,
// which gives a smooth ramp rather than a 1 kHz staircase.
// The product v * (t_loop - t0) is formed at 65 bits and its low 48 bits
// are used: it only wraps for an excursion beyond +/-2^47 pm (140 m), more
// than the cart's whole delay range, so the upper bits are left unused.
// Timing: target_upd pulses 2 cycles after t_valid. A command therefore waits
// between 0 and 1 ms (0.5 ms on average) for its update.
// The evaluation formula and the command fields follow the published
// description; holding the offset as an absolute value, and doing the 0.5 um
// stepping here rather than in the fringe tracker, are this design's choices.
module target_generator
  import cdl_pkg::*;
#(
  parameter longint STEP_MAX = OFFSET_STEP_MAX_PM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        t_valid,
  input  logic        upd,
  input  tick_t       t_loop,
  input  logic        bl_valid,
  input  baseline_t   bl,
  input  logic        off_valid,
  input  pos_t        off_pm,
  output pos_t        target_pm,
  output logic        target_upd,
  output vel_t        vel,
  output pos_t        off_applied,
  output logic [15:0] off_clip_cnt
);

  baseline_t bl_pend, bl_act;
  logic      bl_pending;
  pos_t      off_req;
  tick_t     t_q;
  logic      calc;

  pos_t diff, step;
  logic clip;

  always_comb begin
    diff = off_req - off_applied;
    clip = 1'b0;
    step = diff;
    if (diff > pos_t'(STEP_MAX)) begin
      step = pos_t'(STEP_MAX);
      clip = 1'b1;
    end else if (diff < -pos_t'(STEP_MAX)) begin
      step = -pos_t'(STEP_MAX);
      clip = 1'b1;
    end
  end

  // target = p0 + v * dt + offset, dt signed (no day wrap inside a night)
  logic signed [32:0] dt;
  logic signed [64:0] prod;
  assign dt   = $signed({1'b0, t_q}) - $signed({1'b0, bl_act.t0});
  assign prod = 65'(bl_act.v) * 65'(dt);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bl_pend      <= '0;
      bl_act       <= '0;
      bl_pending   <= 1'b0;
      off_req      <= '0;
      off_applied  <= '0;
      off_clip_cnt <= '0;
      t_q          <= '0;
      calc         <= 1'b0;
      target_pm    <= '0;
      target_upd   <= 1'b0;
    end else begin
      if (bl_valid) begin
        bl_pend    <= bl;
        bl_pending <= 1'b1;
      end
      if (off_valid) off_req <= off_pm;

      calc <= t_valid;
      if (t_valid) begin
        t_q <= t_loop;
        if (upd) begin
          if (bl_pending && !bl_valid) begin
            bl_act     <= bl_pend;
            bl_pending <= 1'b0;
          end
          off_applied <= off_applied + step;
          if (clip && off_clip_cnt != '1) off_clip_cnt <= off_clip_cnt + 1'b1;
        end
      end

      target_upd <= calc;
      if (calc) target_pm <= bl_act.p0 + pos_t'(prod) + off_applied;
    end
  end

  assign vel = bl_act.v;

endmodule
