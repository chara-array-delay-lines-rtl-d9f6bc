// cdl_pkg: types and constants shared by the delay-line cart controller.
//
// Units used throughout the design:
//   * position / optical path : signed 48-bit, 1 LSB = 1 pm. 92 m of optical
//     delay is 9.2e13 pm, inside +/-2^47.
//   * velocity                : signed 32-bit, pm per 25 us tick. 20 mm/s is
//     500000 pm/tick.
//   * time                    : unsigned 32-bit count of 25 us ticks since
//     midnight UTC (40 kHz). A day is 3 456 000 000 ticks, below 2^32.
// The 25 us tick, the 16 MHz master clock, the 5 kHz / 1 kHz / 100 Hz loop
// rates, the 8-ticks-per-loop relation, the 1.319 um laser, the +/-32 um PZT
// range and the 0.5 um offset increment are the published figures of the
// CHARA delay lines. Word widths, fixed-point formats and record layouts are
// this design's own choices.
package cdl_pkg;

  // ---------------------------------------------------------------- clocks
  localparam int unsigned SYS_CLK_HZ        = 100_000_000; // FPGA system clock
  localparam int unsigned MCLK_PER_TICK     = 400;         // 16 MHz / 40 kHz
  localparam int unsigned TICKS_PER_SEC     = 40_000;      // 25 us ticks
  localparam int unsigned TICKS_PER_DAY     = 32'd3_456_000_000;
  localparam int unsigned TICKS_PER_LOOP    = 8;           // 40 kHz / 5 kHz
  localparam int unsigned SYS_CLK_PER_LOOP  = 20_000;      // 100 MHz / 5 kHz
  localparam int unsigned LOOPS_PER_TARGET  = 5;           // 5 kHz / 1 kHz
  localparam int unsigned LOOPS_PER_STEPPER = 50;          // 5 kHz / 100 Hz

  // ------------------------------------------------------------- metrology
  localparam longint FRINGE_PM   = 1_319_000;  // one heterodyne cycle
  localparam longint PHASE_STEPS = 50;         // 100 MHz / 2 MHz
  localparam longint COUNT_PM    = FRINGE_PM / PHASE_STEPS; // 26380 pm

  // --------------------------------------------------------------- actuators
  localparam longint PZT_RANGE_PM       = 32_000_000; // +/-32 um
  localparam longint OFFSET_STEP_MAX_PM = 500_000;    // 0.5 um per update
  localparam int     DAC_MAX            = 32_767;     // +/-10 V, 16-bit
  localparam int     GAIN_FRAC          = 24;         // servo gain fraction bits

  // ------------------------------------------------------------------ types
  typedef logic signed [47:0] pos_t;
  typedef logic signed [31:0] vel_t;
  typedef logic        [31:0] tick_t;
  typedef logic signed [15:0] dac_t;
  typedef logic signed [31:0] gain_t;

  // Baseline solution from the supervisor: position p0 at time t0, rate v.
  typedef struct packed {
    tick_t t0;
    pos_t  p0;
    vel_t  v;
  } baseline_t;

  // PID gains, signed, with pid_ctrl's FRAC fraction bits.
  typedef struct packed {
    gain_t            kp;
    gain_t            ki;
    gain_t            kd;
    logic       [3:0] d_shift;   // derivative low-pass weight 2^-d_shift
    gain_t            kff;       // feedforward gain
    logic       [3:0] ff_shift;  // feedforward low-pass weight (VC1 only)
  } servo_gains_t;

  typedef enum logic [0:0] {
    MODE_SLEW  = 1'b0,           // PZT loop off, carts driven by VC/stepper
    MODE_TRACK = 1'b1
  } ctrl_mode_e;

  // Run-time configuration of one cart controller.
  typedef struct packed {
    ctrl_mode_e   mode;
    logic         round_en;      // round loop tick to a multiple of 8
    logic         tlm_fast;      // telemetry every 5 kHz loop (else 1 kHz)
    logic  [15:0] pzt_kp;        // Q8.8
    logic   [4:0] pzt_lag_shift;
    logic   [4:0] pzt_leak_shift;
    logic  [31:0] pzt_target;    // PZT centre for the VC1 loop, pm
    dac_t         eddy1_target;
    servo_gains_t vc1;
    servo_gains_t vc2;
    servo_gains_t stp;
  } ctrl_cfg_t;

  // One telemetry record (35 bytes), sent most significant byte first.
  typedef struct packed {
    logic  [15:0] seq;
    tick_t        t;
    pos_t         target;
    pos_t         laser;
    logic  [31:0] err;           // laser error, clamped to 32 bits
    logic  [31:0] pzt;
    dac_t         vc1;
    dac_t         vc2;
    logic  [31:0] step_rate;
    logic   [7:0] flags;
  } tlm_rec_t;

  localparam int TLM_BYTES = $bits(tlm_rec_t) / 8;

endpackage
