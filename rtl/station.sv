// station: one independent test station (one actuator and its sensors).
//
// Holds one control path: sensor interface (AFE and encoder drivers),
// waveform generator, PID control logic and the actuator drivers (DAC, PWM
// and stepper), and runs the test flow once per control-loop tick:
//
//   tick -> ACQ   start an ADC conversion and wait for the sample
//        -> CHECK test start / continue? (run bit set, no e-stop input)
//        -> WF    generate the next set point; capture the process variable
//        -> CTRL  closed loop: PID on set point and process variable
//                 open loop: the set point itself is the actuator value
//        -> OUT   update DAC, PWM and stepper
//        -> LOG   post a result record to the DMA logger, wait for next tick
//
// A test starts on a rising edge of cfg.run. It ends when run is cleared or
// an input in cfg.estop_mask is high: the actuator value is then forced to
// zero, and a new rising edge of run is needed to start again. Acquisition
// and logging go on while no test runs. A tick that arrives before the
// previous point is finished is skipped and flagged as a loop overrun.
// The loop latency from tick to actuator update is the ADC read time plus
// about ten cycles (well under the 10 us period at 100 kHz).
// The flow and the block split follow the paper; the order of the steps
// inside one point, the start/stop rules and the zero output after a test
// are this design's choices.
module station
  import mtc_pkg::*;
#(
  parameter int unsigned ROM_AW      = 10,
  parameter int unsigned ADC_BITS    = 32,
  parameter int unsigned ADC_CONV    = 64,
  parameter int unsigned DAC_BITS    = 16,
  parameter int unsigned SCLK_HALF   = 2,
  parameter int unsigned STEP_PULSE  = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tick,
  input  station_cfg_t cfg,
  input  logic [31:0]  gpio_in,
  // ADC / AFE
  output logic         adc_cnv,
  output logic         adc_sclk,
  input  logic         adc_sdo,
  // encoder
  input  logic         enc_a,
  input  logic         enc_b,
  input  logic         enc_z,
  // CPU-streamed set points
  input  logic [63:0]  s_tdata,
  input  logic         s_tvalid,
  output logic         s_tready,
  // actuators
  output logic         dac_cs_n,
  output logic         dac_sclk,
  output logic         dac_sdi,
  output logic         pwm,
  output logic         pwm_dir,
  output logic         step,
  output logic         step_dir,
  // results
  output log_rec_t     rec,
  output logic         rec_valid,
  output logic         active,
  output logic [15:0]  overruns
);
  typedef enum logic [2:0] {S_IDLE, S_ACQ, S_CHECK, S_WF, S_CTRL, S_OUT, S_LOG} sstate_e;
  sstate_e st;

  sample_t afe_sample, enc_pos, enc_idx, step_pos;
  logic    afe_valid, afe_busy;
  logic [15:0] enc_err;
  logic    run_q, estop, start_test, wf_step, wf_valid, wf_underrun, underrun_q;
  logic    pid_valid, pid_sat, overrun_q, dac_busy;
  fix64_t  setpoint, pv, pid_u, u;
  logic [DAC_BITS-1:0] dac_code;
  logic [31:0] seq;

  assign estop = |(gpio_in & cfg.estop_mask);

  afe_driver #(.DATA_BITS(ADC_BITS), .SCLK_HALF(SCLK_HALF), .CONV_CYCLES(ADC_CONV)) u_afe (
    .clk, .rst_n, .start(tick && st == S_IDLE),
    .cnv(adc_cnv), .sclk(adc_sclk), .sdo(adc_sdo),
    .sample(afe_sample), .valid(afe_valid), .busy(afe_busy));

  encoder_driver u_enc (
    .clk, .rst_n, .clear(1'b0), .enc_a, .enc_b, .enc_z,
    .position(enc_pos), .index_pos(enc_idx), .errors(enc_err));

  wf_gen #(.ROM_AW(ROM_AW)) u_wf (
    .clk, .rst_n, .cfg, .start(start_test), .step(wf_step),
    .s_tdata, .s_tvalid, .s_tready,
    .afe_sample, .enc_pos,
    .setpoint, .pv, .valid(wf_valid), .underrun(wf_underrun));

  pid_ctrl u_pid (
    .clk, .rst_n, .clear(start_test), .in_valid(wf_valid && cfg.closed_loop),
    .setpoint, .pv, .kp(cfg.kp), .ki(cfg.ki), .kd(cfg.kd), .kff(cfg.kff),
    .out_min(cfg.out_min), .out_max(cfg.out_max),
    .u(pid_u), .out_valid(pid_valid), .saturated(pid_sat));

  dac_driver #(.DAC_BITS(DAC_BITS), .SCLK_HALF(SCLK_HALF)) u_dac (
    .clk, .rst_n, .load(st == S_OUT && cfg.dac_en), .u,
    .cs_n(dac_cs_n), .sclk(dac_sclk), .sdi(dac_sdi), .busy(dac_busy), .code(dac_code));

  pwm_driver u_pwm (
    .clk, .rst_n, .en(cfg.pwm_en), .period(cfg.pwm_period), .u,
    .pwm, .dir(pwm_dir));

  stepper_driver #(.PULSE(STEP_PULSE)) u_step (
    .clk, .rst_n, .en(cfg.step_en && active), .clear(start_test), .u,
    .step, .dir(step_dir), .position(step_pos));

  assign start_test = (st == S_CHECK) && cfg.run && !run_q && !estop;
  assign wf_step    = (st == S_CHECK) && (start_test || (active && cfg.run && !estop));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; run_q <= 1'b0; active <= 1'b0; u <= '0;
      rec <= '0; rec_valid <= 1'b0; seq <= '0; overruns <= '0;
      overrun_q <= 1'b0; underrun_q <= 1'b0;
    end else begin
      rec_valid <= 1'b0;
      if (tick && st != S_IDLE) begin
        overruns  <= overruns + 1'b1;
        overrun_q <= 1'b1;
      end
      if (wf_underrun) underrun_q <= 1'b1;
      case (st)
        S_IDLE:  if (tick) st <= S_ACQ;
        S_ACQ:   if (afe_valid) st <= S_CHECK;
        S_CHECK: begin
          run_q <= cfg.run;
          if (wf_step) begin
            active <= 1'b1;
            st     <= S_WF;
          end else begin
            active <= 1'b0;
            u      <= '0;
            st     <= S_OUT;
          end
        end
        S_WF: if (wf_valid) begin
          if (cfg.closed_loop) st <= S_CTRL;
          else begin
            u  <= setpoint;
            st <= S_OUT;
          end
        end
        S_CTRL: if (pid_valid) begin
          u  <= pid_u;
          st <= S_OUT;
        end
        S_OUT: st <= S_LOG;
        S_LOG: begin
          rec.seq      <= seq;
          rec.flags    <= {9'b0, enc_err != 16'd0, pid_sat, underrun_q, overrun_q, estop, cfg.closed_loop, active};
          rec.setpoint <= setpoint;
          rec.pv       <= pv;
          rec.u        <= u;
          rec.afe      <= afe_sample;
          rec.enc      <= enc_pos;
          rec.gpio     <= gpio_in;
          rec.step_pos <= step_pos;
          rec_valid    <= 1'b1;
          seq          <= seq + 1'b1;
          overrun_q    <= 1'b0;
          underrun_q   <= 1'b0;
          st           <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
