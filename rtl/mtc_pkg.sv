// mtc_pkg: shared types, constants and the register map of the material
// testing machine controller.
//
// Number formats (this design's choice; the paper only asks for 64-bit
// high-accuracy profiles and 32-bit measurements):
//   fix64_t  signed Q32.32 fixed point. The integer part is in raw sensor
//            counts, so a set point can be compared directly with a sample.
//   sample_t signed 32-bit raw measurement (ADC counts or encoder counts).
//   gain_t   signed Q16.16 controller gain.
//
// Configuration is written as (address, data) pairs of 32-bit words. The
// address holds the station number in bits [15:8] (0xFF selects the global
// registers) and the register number in bits [7:0].
package mtc_pkg;

  typedef logic signed [63:0] fix64_t;
  typedef logic signed [31:0] sample_t;
  typedef logic signed [31:0] gain_t;

  localparam fix64_t FIX64_MAX = 64'sh7FFF_FFFF_FFFF_FFFF;
  localparam fix64_t FIX64_MIN = 64'sh8000_0000_0000_0000;

  // Waveform profile selected per station.
  typedef enum logic [2:0] {
    PROF_HOLD     = 3'd0,  // constant level = offset
    PROF_RAMP     = 3'd1,  // move toward offset at ramp_rate per point
    PROF_SINE     = 3'd2,  // offset + amplitude * sin (sweep / taper via freq_step, amp_step)
    PROF_SQUARE   = 3'd3,
    PROF_TRIANGLE = 3'd4,
    PROF_STREAM   = 3'd5   // points streamed by the CPU over DMA
  } profile_e;

  // Source of the process variable ("control channel").
  typedef enum logic {
    PV_AFE = 1'b0,
    PV_ENC = 1'b1
  } pv_sel_e;

  typedef struct packed {
    logic        run;          // start / continue the test
    logic        closed_loop;  // 1: PID on set point and process variable, 0: set point to actuator
    pv_sel_e     pv_sel;
    profile_e    profile;
    logic        dac_en;
    logic        pwm_en;
    logic        step_en;
    fix64_t      offset;       // mean level, hold level or ramp target
    fix64_t      amplitude;
    fix64_t      amp_step;     // amplitude change per point (tapered sine)
    logic [31:0] freq_inc;     // phase increment per point, full cycle = 2^32
    logic signed [31:0] freq_step;  // phase-increment change per point (sweep sine)
    fix64_t      ramp_rate;    // ramp change per point (positive)
    gain_t       kp;
    gain_t       ki;
    gain_t       kd;
    gain_t       kff;
    fix64_t      out_min;
    fix64_t      out_max;
    logic [15:0] pwm_period;   // clock cycles per PWM period
    logic [31:0] estop_mask;   // GPIO inputs that stop this station's test
  } station_cfg_t;

  typedef struct packed {
    logic [31:0] gpio_out;
    logic [31:0] gpio_dir;     // 1 = drive the pin
    logic [31:0] loop_div;     // clock cycles per control-loop period
    logic        acq_en;       // run the acquisition / control loop
  } global_cfg_t;

  // Station register numbers (address bits [7:0]).
  localparam logic [7:0] R_CTRL       = 8'h00;  // [0] run [1] closed_loop [2] pv_sel [6:4] profile [8] dac_en [9] pwm_en [10] step_en
  localparam logic [7:0] R_OFFSET_LO  = 8'h01;
  localparam logic [7:0] R_OFFSET_HI  = 8'h02;
  localparam logic [7:0] R_AMP_LO     = 8'h03;
  localparam logic [7:0] R_AMP_HI     = 8'h04;
  localparam logic [7:0] R_ASTEP_LO   = 8'h05;
  localparam logic [7:0] R_ASTEP_HI   = 8'h06;
  localparam logic [7:0] R_FREQ_INC   = 8'h07;
  localparam logic [7:0] R_FREQ_STEP  = 8'h08;
  localparam logic [7:0] R_RAMP_LO    = 8'h09;
  localparam logic [7:0] R_RAMP_HI    = 8'h0A;
  localparam logic [7:0] R_KP         = 8'h0B;
  localparam logic [7:0] R_KI         = 8'h0C;
  localparam logic [7:0] R_KD         = 8'h0D;
  localparam logic [7:0] R_KFF        = 8'h0E;
  localparam logic [7:0] R_OMIN_LO    = 8'h0F;
  localparam logic [7:0] R_OMIN_HI    = 8'h10;
  localparam logic [7:0] R_OMAX_LO    = 8'h11;
  localparam logic [7:0] R_OMAX_HI    = 8'h12;
  localparam logic [7:0] R_PWM_PERIOD = 8'h13;
  localparam logic [7:0] R_ESTOP_MASK = 8'h14;

  // Global register numbers (station field = 0xFF).
  localparam logic [7:0] STATION_GLOBAL = 8'hFF;
  localparam logic [7:0] G_GPIO_OUT = 8'h00;
  localparam logic [7:0] G_GPIO_DIR = 8'h01;
  localparam logic [7:0] G_LOOP_DIV = 8'h02;
  localparam logic [7:0] G_ACQ_EN   = 8'h03;

  // One result record per station and control-loop period, sent to the CPU
  // as LOG_WORDS 64-bit beats:
  //   0: {8'hA5, station[7:0], flags[15:0], seq[31:0]}
  //   1: set point   2: process variable   3: control output
  //   4: {afe sample, encoder position}   5: {gpio inputs, stepper position}
  localparam int unsigned LOG_WORDS = 6;
  localparam logic [7:0]  LOG_MAGIC = 8'hA5;

  // flags: [0] test active [1] closed loop [2] e-stop [3] loop overrun
  //        [4] stream underrun [5] PID output clamped [6] encoder error seen
  //        [15] earlier record(s) of this station dropped
  typedef struct packed {
    logic [31:0] seq;
    logic [15:0] flags;
    fix64_t      setpoint;
    fix64_t      pv;
    fix64_t      u;
    sample_t     afe;
    sample_t     enc;
    logic [31:0] gpio;
    logic [31:0] step_pos;
  } log_rec_t;

  // Saturate a wide signed value into Q32.32.
  function automatic fix64_t sat64(input logic signed [127:0] v);
    if (v > 128'(signed'(FIX64_MAX)))      return FIX64_MAX;
    else if (v < 128'(signed'(FIX64_MIN))) return FIX64_MIN;
    else                                   return v[63:0];
  endfunction

endpackage
