// tick_quantizer: the time stamp of each 5 kHz servo loop.
//
// At every loop_stb the free-running 25 us tick count is sampled. Each loop
// should advance it by exactly TICKS_PER_LOOP (8), but the loop is timed by
// the FPGA's own oscillator, so now and then a loop sees 7 or 9. Used raw,
// that step error becomes a target error proportional to the cart speed.
// With round_en set the sample is rounded to the nearest multiple of 8,
// (t + 4) with the low three bits cleared, which restores a clean 8-tick
// step: the fix adopted on the real system. round_en = 0 gives the raw
// sample, for diagnosis. jitter_cnt counts loops whose raw step was not 8
// (saturating; the first loop after reset is not judged).
// t_loop and t_valid appear one cycle after loop_stb.
module tick_quantizer
  import cdl_pkg::*;
#(
  parameter int unsigned STEP = TICKS_PER_LOOP
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        loop_stb,
  input  tick_t       tick,
  input  logic        round_en,
  output tick_t       t_loop,
  output logic        t_valid,
  output logic [15:0] jitter_cnt
);

  localparam int unsigned SH = $clog2(STEP);
  initial assert (STEP == (1 << SH)) else $error("STEP must be a power of two");

  tick_t raw_prev, rounded;
  logic  have_prev;

  assign rounded = (tick + tick_t'(STEP / 2)) & ~tick_t'(STEP - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t_loop     <= '0;
      t_valid    <= 1'b0;
      jitter_cnt <= '0;
      raw_prev   <= '0;
      have_prev  <= 1'b0;
    end else begin
      t_valid <= loop_stb;
      if (loop_stb) begin
        t_loop    <= round_en ? rounded : tick;
        raw_prev  <= tick;
        have_prev <= 1'b1;
        if (have_prev && (tick - raw_prev) != tick_t'(STEP) && jitter_cnt != '1)
          jitter_cnt <= jitter_cnt + 1'b1;
      end
    end
  end

endmodule
