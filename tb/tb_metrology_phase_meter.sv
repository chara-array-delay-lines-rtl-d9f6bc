// tb_metrology_phase_meter: a heterodyne model drives the phase meter.
// The reference is an exact 2 MHz square wave; the measurement square wave
// has phase (2 MHz * t + path / 1.319 um), computed here in real arithmetic.
// Checks: position after homing, moves to fixed positions inside one
// fringe, ramps of
// +100 um and -150 um at 0.2 m/s (75 and 114 whole fringes, Doppler shift
// 150 kHz), each within 1.5 counts (about 40 nm) of the modelled path, and
// loss and return of the measurement signal.
module tb_metrology_phase_meter;
  timeunit 1ns; timeprecision 1ps;
  import cdl_pkg::*;
  logic clk = 0, rst_n = 0, ref_sq = 0, meas_sq = 0, home = 0;
  pos_t pos_pm;
  logic pos_upd, met_valid;
  int checks = 0, failures = 0;
  real path = 0.0, home_path = 0.0;
  bit  los = 0;
  int  nupd = 0;

  metrology_phase_meter dut (.clk, .rst_n, .ref_sq, .meas_sq, .home, .pos_pm, .pos_upd, .met_valid);

  always #5 clk = ~clk;

  function automatic real frac(input real x);
    return x - $floor(x);
  endfunction

  always @(negedge clk) begin
    real rp, mp;
    rp = $realtime * 0.002;
    mp = rp + path / 1319000.0;
    ref_sq  <= frac(rp) < 0.5;
    meas_sq <= los ? 1'b0 : (frac(mp) < 0.5);
  end

  always @(posedge clk) if (pos_upd) nupd++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // moves the path at 0.2 m/s (2000 pm per clock): the phase must move
  // continuously, as a real cart does, or edges are lost or repeated
  task automatic move_to(input real p);
    while (path < p - 2000.0 || path > p + 2000.0) begin
      @(posedge clk);
      path = (path < p) ? path + 2000.0 : path - 2000.0;
    end
    path = p;
  endtask

  task automatic check_pos(input string what);
    real expv, diff;
    expv = path - home_path;
    diff = real'(pos_pm) - expv;
    check(diff < 39570.0 && diff > -39570.0,
          $sformatf("%s: pos %0d pm, expected %0.0f pm", what, pos_pm, expv));
  endtask

  initial begin
    #3_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    #5000;
    check(met_valid, "signal present");
    @(posedge clk); home <= 1; home_path = path;
    @(posedge clk); home <= 0;
    #2000 check_pos("after homing");
    move_to(300_000.0);  #3000 check_pos("static +300 nm");
    move_to(-200_000.0); #3000 check_pos("static -200 nm");
    move_to(250_000.0);  #3000 check_pos("static +250 nm");
    move_to(0.0);        #3000 check_pos("static 0");
    // +100 um at 0.2 m/s: 2000 pm per 10 ns
    nupd = 0;
    repeat (50_000) begin @(posedge clk); path = path + 2000.0; end
    #3000 check_pos("after +100 um ramp");
    check(nupd > 900, $sformatf("updates during ramp %0d", nupd));
    repeat (75_000) begin @(posedge clk); path = path - 2000.0; end
    #3000 check_pos("after -150 um ramp");
    move_to(path + 12_345.0); #3000 check_pos("static fraction");
    los = 1; #3000
    check(!met_valid, "signal loss flagged");
    los = 0; #3000
    check(met_valid, "signal back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
