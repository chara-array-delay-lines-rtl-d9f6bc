// tb_tick_quantizer: feeds tick samples whose step is 8, 7 or 9 and checks
// the rounded time (nearest multiple of 8, computed here by integer
// division), the raw pass-through with rounding off, and the count of
// loops whose raw step was not 8.
module tb_tick_quantizer;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, loop_stb = 0, round_en = 1;
  tick_t tick = 0, t_loop;
  logic t_valid;
  logic [15:0] jitter_cnt;
  int checks = 0, failures = 0, exp_jit = 0;

  tick_quantizer dut (.clk, .rst_n, .loop_stb, .tick, .round_en, .t_loop, .t_valid, .jitter_cnt);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t, prev, expv;
  int step;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 80_000; prev = -1;
    for (int i = 0; i < 400; i++) begin
      case ($urandom_range(0, 9))
        0: step = 7;
        1: step = 9;
        default: step = 8;
      endcase
      if (i > 0) t = t + step;
      if (i == 300) round_en = 0;
      @(posedge clk); tick <= tick_t'(t); loop_stb <= 1;
      @(posedge clk); loop_stb <= 0;
      @(posedge clk);
      if (prev >= 0 && (t - prev) != 8) exp_jit++;
      prev = t;
      expv = round_en ? ((t + 4) / 8) * 8 : t;
      check(t_loop == tick_t'(expv), $sformatf("t=%0d got %0d exp %0d", t, t_loop, expv));
      check(jitter_cnt == 16'(exp_jit), $sformatf("jitter count %0d exp %0d", jitter_cnt, exp_jit));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
