// master_timebase: time of day in 25 us ticks, derived from the array's
// shared 16 MHz master clock and its 1 Hz pulse.
//
// Every cart controller keeps the same time: the number of 25 us ticks since
// midnight UTC (40 kHz = 16 MHz / 400). The 16 MHz and 1 Hz inputs arrive
// asynchronously; each passes a two-flop synchronizer clocked by the 100 MHz
// system clock, and its rising edges are counted. Every MCLK_PER_TICK master
// edges the tick advances by one and tick_stb pulses for one cycle; the count
// wraps at midnight.
//
// Setting the clock: the supervisor raises sync_req for one cycle with the
// time of the coming second in sync_tick. At the next 1 Hz edge the tick is
// loaded with that value, the sub-tick divider restarts, and `synced` goes
// high. After that, every 1 Hz edge must find exactly TICKS_PER_SEC ticks
// since the previous one; a second that does not sets the sticky pps_err
// flag (cleared by a new sync_req). This check is this design's addition: it
// exposes the "clock out of sync" condition that otherwise shows only as
// target spikes. Latency: tick changes 3 cycles after the master-clock edge
// that completes it (2 synchronizer flops + 1 edge detect).
module master_timebase
  import cdl_pkg::*;
#(
  parameter int unsigned MCLK_DIV  = MCLK_PER_TICK,
  parameter int unsigned TICKS_SEC = TICKS_PER_SEC,
  parameter int unsigned TICKS_DAY = TICKS_PER_DAY
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  mclk_16m,
  input  logic  pps_1hz,
  input  logic  sync_req,
  input  tick_t sync_tick,
  output tick_t tick,
  output logic  tick_stb,
  output logic  synced,
  output logic  pps_err
);

  logic [2:0] mclk_s, pps_s;
  logic       mclk_rise, pps_rise;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mclk_s <= '0;
      pps_s  <= '0;
    end else begin
      mclk_s <= {mclk_s[1:0], mclk_16m};
      pps_s  <= {pps_s[1:0], pps_1hz};
    end
  end

  assign mclk_rise = mclk_s[1] & ~mclk_s[2];
  assign pps_rise  = pps_s[1]  & ~pps_s[2];

  logic [$clog2(MCLK_DIV)-1:0] div_q;
  logic [$clog2(TICKS_SEC+2):0] sec_ticks;
  logic  armed;
  tick_t load_val;
  logic  tick_done;
  logic [$clog2(TICKS_SEC+2):0] sec_next;

  assign tick_done = mclk_rise && (div_q == MCLK_DIV[$bits(div_q)-1:0] - 1'b1);
  assign sec_next  = sec_ticks + {{($bits(sec_ticks)-1){1'b0}}, tick_done};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      div_q     <= '0;
      tick      <= '0;
      tick_stb  <= 1'b0;
      armed     <= 1'b0;
      load_val  <= '0;
      synced    <= 1'b0;
      pps_err   <= 1'b0;
      sec_ticks <= '0;
    end else begin
      tick_stb <= 1'b0;
      if (sync_req) begin
        armed    <= 1'b1;
        load_val <= sync_tick;
        pps_err  <= 1'b0;
      end
      if (pps_rise && armed && !sync_req) begin
        tick      <= load_val;
        div_q     <= '0;
        armed     <= 1'b0;
        synced    <= 1'b1;
        sec_ticks <= '0;
        tick_stb  <= 1'b1;
      end else begin
        if (tick_done) begin
          div_q    <= '0;
          tick     <= (tick == TICKS_DAY - 1) ? '0 : tick + 1'b1;
          tick_stb <= 1'b1;
        end else if (mclk_rise) begin
          div_q <= div_q + 1'b1;
        end
        if (pps_rise) begin
          // a tick completing on the 1 Hz edge still belongs to the old second
          if (synced && sec_next != TICKS_SEC[$bits(sec_ticks)-1:0])
            pps_err <= 1'b1;
          sec_ticks <= '0;
        end else begin
          sec_ticks <= sec_next;
        end
      end
    end
  end

endmodule
