// loop_scheduler: servo-rate strobes of the cart controller.
//
// The PZT loop runs at 5 kHz, the target update and the two voice-coil loops
// at 1 kHz, and the stepper loop at 100 Hz. All three strobes are one
// system-clock cycle wide and are made by counting the FPGA's own 100 MHz
// clock: loop_stb every SYS_CLK_PER_LOOP cycles, target_stb on every
// LOOPS_PER_TARGET-th loop_stb, stepper_stb on every LOOPS_PER_STEPPER-th
// loop_stb (both coincide with a loop_stb, and stepper_stb with a
// target_stb). The first loop_stb comes SYS_CLK_PER_LOOP cycles after reset
// and carries target_stb and stepper_stb.
//
// Because this clock is not the 16 MHz master clock, the tick count read at
// each loop_stb advances by 8 most of the time but by 7 or 9 whenever the two
// oscillators slip by a tick; tick_quantizer removes that. Timing the loop
// from the local oscillator is this design's reading of where the published
// jitter came from.
module loop_scheduler
  import cdl_pkg::*;
#(
  parameter int unsigned CLK_PER_LOOP   = SYS_CLK_PER_LOOP,
  parameter int unsigned LOOPS_PER_TGT  = LOOPS_PER_TARGET,
  parameter int unsigned LOOPS_PER_STP  = LOOPS_PER_STEPPER
) (
  input  logic clk,
  input  logic rst_n,
  output logic loop_stb,
  output logic target_stb,
  output logic stepper_stb
);

  logic [$clog2(CLK_PER_LOOP)-1:0]  cyc_q;
  logic [$clog2(LOOPS_PER_STP)-1:0] loop_q;
  logic                             wrap;

  assign wrap = (cyc_q == CLK_PER_LOOP[$bits(cyc_q)-1:0] - 1'b1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc_q       <= '0;
      loop_q      <= '0;
      loop_stb    <= 1'b0;
      target_stb  <= 1'b0;
      stepper_stb <= 1'b0;
    end else begin
      loop_stb    <= wrap;
      target_stb  <= wrap && (loop_q % LOOPS_PER_TGT[$bits(loop_q)-1:0] == '0);
      stepper_stb <= wrap && (loop_q == '0);
      cyc_q       <= wrap ? '0 : cyc_q + 1'b1;
      if (wrap)
        loop_q <= (loop_q == LOOPS_PER_STP[$bits(loop_q)-1:0] - 1'b1) ? '0 : loop_q + 1'b1;
    end
  end

  initial begin
    assert (LOOPS_PER_STP % LOOPS_PER_TGT == 0)
      else $error("stepper period must be a whole number of target periods");
  end

endmodule
