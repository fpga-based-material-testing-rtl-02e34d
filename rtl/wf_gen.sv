// wf_gen: waveform (set point) generator of one station, with selection of
// the control channel that feeds the controller.
//
// Each `step` pulse produces the next point of the profile, in signed Q32.32
// (64 bits), and `valid` pulses three cycles later with `setpoint` and `pv`.
// Profiles (cfg.profile):
//   HOLD      setpoint = offset
//   RAMP      setpoint moves toward offset by ramp_rate per point, then holds
//   SINE      offset + amplitude * sin(phase)
//   SQUARE    offset +/- amplitude, sign of sin(phase)
//   TRIANGLE  offset + amplitude * tri(phase), in phase with the sine
//   STREAM    next point taken from the CPU stream (s_tdata); if none is
//             waiting the last point is held and `underrun` pulses
// For the periodic profiles phase advances by freq after every point; freq
// changes by freq_step (sweep sine) and amplitude by amp_step (tapered sine)
// after every point. `start` reloads phase = 0, freq = freq_inc and
// amplitude, and makes a ramp begin from the present set point.
// The process variable (`pv`) is the AFE sample or the encoder position,
// chosen by cfg.pv_sel, widened to Q32.32 and captured with the same step.
//
// The paper asks for a 64-bit double-precision generator of ramp, sine,
// square, triangular, tapered and sweep sine and other profiles; the use of
// fixed point instead of IEEE floating point, the phase accumulator with a
// quarter-wave table and the profile definitions are this design's choices.
module wf_gen
  import mtc_pkg::*;
#(
  parameter int unsigned ROM_AW = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  input  station_cfg_t cfg,
  input  logic         start,
  input  logic         step,
  input  logic [63:0]  s_tdata,
  input  logic         s_tvalid,
  output logic         s_tready,
  input  sample_t      afe_sample,
  input  sample_t      enc_pos,
  output fix64_t       setpoint,
  output fix64_t       pv,
  output logic         valid,
  output logic         underrun
);
  localparam logic signed [31:0] ONE = 32'sh7FFF_FFFF;  // +1.0 in Q1.31

  logic [31:0]  phase, freq;
  fix64_t       amp;
  logic         s1, s2;             // pipeline valid bits
  logic [31:0]  ph1;                // phase of the point in flight
  fix64_t       amp1, amp2;
  logic [30:0]  rom_q;
  logic [ROM_AW-1:0] rom_addr;
  logic signed [31:0] wave2;        // Q1.31 wave value
  logic signed [31:0] sin_v, tri_v, sq_v;
  logic [1:0]   quad;

  // Quarter-wave addressing: quadrants 1 and 3 read the table backwards.
  logic [31:0] ph_rd;
  assign ph_rd    = start ? 32'h0 : phase;
  assign rom_addr = ph_rd[30] ? ~ph_rd[29 -: ROM_AW] : ph_rd[29 -: ROM_AW];

  sine_rom #(.AW(ROM_AW)) u_rom (.clk(clk), .addr(rom_addr), .q(rom_q));

  assign quad  = ph1[31:30];
  assign sin_v = quad[1] ? -$signed({1'b0, rom_q}) : $signed({1'b0, rom_q});
  assign sq_v  = quad[1] ? -ONE : ONE;

  // Triangle in Q1.31: 0 -> +1 -> -1 -> 0 over one period.
  always_comb begin
    logic signed [34:0] t;
    case (quad)
      2'd0:    t = 35'sd0 + $signed({3'b0, ph1}) * 2;
      2'd3:    t = $signed({3'b0, ph1}) * 2 - 35'sh2_0000_0000;
      default: t = 35'sh1_0000_0000 - $signed({3'b0, ph1}) * 2;
    endcase
    if (t > 35'(ONE))        tri_v = ONE;
    else if (t < -35'(ONE))  tri_v = -ONE;
    else                     tri_v = t[31:0];
  end

  fix64_t              prod_sh;
  logic signed [95:0]  prod;
  assign prod    = amp2 * wave2;
  assign prod_sh = prod[94:31];

  // Ramp toward the target without overshoot.
  function automatic fix64_t ramp_next(fix64_t cur, fix64_t tgt, fix64_t rate);
    logic signed [64:0] diff;
    diff = 65'(tgt) - 65'(cur);
    if (diff > 65'(rate))        return cur + rate;
    else if (diff < -65'(rate))  return cur - rate;
    else                         return tgt;
  endfunction

  assign s_tready = step && (cfg.profile == PROF_STREAM);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0; freq <= '0; amp <= '0;
      s1 <= 1'b0; s2 <= 1'b0; valid <= 1'b0; underrun <= 1'b0;
      ph1 <= '0; amp1 <= '0; amp2 <= '0; wave2 <= '0;
      setpoint <= '0; pv <= '0;
    end else begin
      s1       <= step;
      s2       <= s1;
      valid    <= s2;
      underrun <= 1'b0;
      if (start || step) begin
        // Present state, or the freshly loaded one at the start of a test.
        logic [31:0] ph_c, fr_c;
        fix64_t      am_c;
        ph_c = start ? 32'h0 : phase;
        fr_c = start ? cfg.freq_inc : freq;
        am_c = start ? cfg.amplitude : amp;
        if (step) begin
          ph1   <= ph_c;
          amp1  <= am_c;
          phase <= ph_c + fr_c;
          freq  <= fr_c + cfg.freq_step;
          amp   <= am_c + cfg.amp_step;
          pv    <= (cfg.pv_sel == PV_ENC) ? {enc_pos, 32'h0} : {afe_sample, 32'h0};
        end else begin
          phase <= ph_c;
          freq  <= fr_c;
          amp   <= am_c;
        end
      end
      if (s1) begin
        amp2 <= amp1;
        case (cfg.profile)
          PROF_SQUARE:   wave2 <= sq_v;
          PROF_TRIANGLE: wave2 <= tri_v;
          default:       wave2 <= sin_v;
        endcase
      end
      if (s2) begin
        case (cfg.profile)
          PROF_HOLD:   setpoint <= cfg.offset;
          PROF_RAMP:   setpoint <= ramp_next(setpoint, cfg.offset, cfg.ramp_rate);
          PROF_STREAM: ;
          default:     setpoint <= cfg.offset + prod_sh;
        endcase
      end
      if (step && cfg.profile == PROF_STREAM) begin
        if (s_tvalid) setpoint <= s_tdata;
        else          underrun <= 1'b1;
      end
    end
  end
endmodule
