// tb_master_timebase: checks the 25 us tick derived from a 16 MHz master
// clock sampled by a 100 MHz system clock: tick spacing (2500 system
// cycles), loading a new time at the 1 Hz edge after a sync request, the
// ticks-per-second check (pps_err) and the wrap at midnight. The second is
// shortened to 20 ticks (TICKS_SEC override) to keep the run short; the
// master-clock divider keeps its real value of 400.
module tb_master_timebase;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;

  localparam int TS = 20;
  logic clk = 0, rst_n = 0, mclk = 0, pps = 0, sync_req = 0;
  tick_t sync_tick = '0, tick;
  logic tick_stb, synced, pps_err;
  int checks = 0, failures = 0;

  master_timebase #(.TICKS_SEC(TS)) dut (
    .clk, .rst_n, .mclk_16m(mclk), .pps_1hz(pps), .sync_req, .sync_tick,
    .tick, .tick_stb, .synced, .pps_err
  );

  always #5 clk = ~clk;
  always #31.25 mclk = ~mclk;

  // 1 Hz pulse aligned to master clock edges; pps_len sets the "second"
  int mcnt = 0, pps_len = TS * 400;
  always @(posedge mclk) begin
    mcnt <= (mcnt == pps_len - 1) ? 0 : mcnt + 1;
    pps  <= (mcnt == pps_len - 1) || (mcnt < 20 && mcnt != 0 && pps);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_t, gap, n;
  initial begin
    repeat (10) @(posedge clk);
    rst_n = 1;
    // tick spacing
    @(posedge tick_stb); last_t = $time;
    for (n = 0; n < 5; n++) begin
      @(posedge clk iff tick_stb);
      gap = ($time - last_t) / 10; last_t = $time;
      if (n > 0) check(gap >= 2499 && gap <= 2501, $sformatf("tick gap %0d", gap));
    end
    check(!synced, "not synced before sync");
    // sync: load 1000 at next pps
    @(posedge clk); sync_req <= 1; sync_tick <= 1000;
    @(posedge clk); sync_req <= 0;
    @(posedge clk iff synced);
    @(posedge clk);
    check(tick == 1000, $sformatf("loaded tick %0d", tick));
    // one full second later
    @(posedge pps); repeat (5) @(posedge clk);
    check(tick == 1000 + TS, $sformatf("tick after one second %0d", tick));
    check(!pps_err, "no pps_err for a good second");
    @(posedge pps); repeat (5) @(posedge clk);
    check(tick == 1000 + 2 * TS, $sformatf("tick after two seconds %0d", tick));
    check(!pps_err, "still no pps_err");
    // a short second
    @(posedge mclk); pps_len = TS * 400 - 600;
    @(posedge pps); @(posedge pps); repeat (5) @(posedge clk);
    check(pps_err, "pps_err after a short second");
    pps_len = TS * 400;
    // midnight wrap
    @(posedge clk); sync_req <= 1; sync_tick <= TICKS_PER_DAY - 2;
    @(posedge clk); sync_req <= 0;
    @(posedge clk);
    check(!pps_err, "pps_err cleared by sync");
    @(posedge clk iff (tick == TICKS_PER_DAY - 2));
    @(posedge clk iff tick_stb); @(posedge clk iff tick_stb); @(posedge clk);
    check(tick == 0, $sformatf("wrap to 0, got %0d", tick));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
