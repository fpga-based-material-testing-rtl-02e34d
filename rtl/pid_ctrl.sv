// pid_ctrl: discrete PID controller with feed-forward, output limits and
// anti-windup, one update per control-loop point.
//
// On `in_valid` it takes the set point r and process variable y (Q32.32) and
// three cycles later pulses `out_valid` with
//   e = r - y,  u = Kp*e + I + Kd*(e - e_prev) + Kff*r,  I += Ki*e
// clamped to [out_min, out_max]. Gains are signed Q16.16 and per point (Ki
// already includes the loop period). The integrator is not advanced on a
// point where the output is clamped and the new term would push it further
// into the limit (conditional integration). `clear` empties the integrator
// and the stored error, for the start of a test. All sums are saturated.
// The paper names PID and feed-forward control as the closed-loop
// algorithms; the number formats, pipeline and anti-windup rule are this
// design's choices.
module pid_ctrl
  import mtc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  fix64_t setpoint,
  input  fix64_t pv,
  input  gain_t  kp,
  input  gain_t  ki,
  input  gain_t  kd,
  input  gain_t  kff,
  input  fix64_t out_min,
  input  fix64_t out_max,
  output fix64_t u,
  output logic   out_valid,
  output logic   saturated
);
  logic   v1, v2;
  fix64_t e1, de1, r1, e_prev, integ;
  logic signed [95:0] p_t, i_t, d_t, f_t;     // products, Q48.48
  fix64_t p2, i2, d2, f2, inew2;
  logic signed [127:0] sum2;

  // Stage 1: error and its difference.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; e1 <= '0; de1 <= '0; r1 <= '0; e_prev <= '0;
    end else begin
      v1 <= in_valid && !clear;
      if (clear) begin
        e_prev <= '0;
      end else if (in_valid) begin
        e1     <= sat64(128'(setpoint) - 128'(pv));
        de1    <= sat64(128'(sat64(128'(setpoint) - 128'(pv))) - 128'(e_prev));
        e_prev <= sat64(128'(setpoint) - 128'(pv));
        r1     <= setpoint;
      end
    end
  end

  assign p_t = e1  * kp;
  assign i_t = e1  * ki;
  assign d_t = de1 * kd;
  assign f_t = r1  * kff;

  // Stage 2: scaled terms and the candidate integrator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; p2 <= '0; i2 <= '0; d2 <= '0; f2 <= '0; inew2 <= '0;
    end else begin
      v2 <= v1 && !clear;
      if (v1) begin
        p2    <= sat64(128'(p_t >>> 16));
        i2    <= sat64(128'(i_t >>> 16));
        d2    <= sat64(128'(d_t >>> 16));
        f2    <= sat64(128'(f_t >>> 16));
        inew2 <= sat64(128'(integ) + 128'(i_t >>> 16));
      end
    end
  end

  assign sum2 = 128'(p2) + 128'(inew2) + 128'(d2) + 128'(f2);

  // Stage 3: limit, anti-windup, output.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; out_valid <= 1'b0; saturated <= 1'b0; integ <= '0;
    end else begin
      out_valid <= v2 && !clear;
      if (clear) begin
        integ     <= '0;
        u         <= '0;
        saturated <= 1'b0;
      end else if (v2) begin
        if (sum2 > 128'(out_max)) begin
          u         <= out_max;
          saturated <= 1'b1;
          if (i2 <= 0) integ <= inew2;
        end else if (sum2 < 128'(out_min)) begin
          u         <= out_min;
          saturated <= 1'b1;
          if (i2 >= 0) integ <= inew2;
        end else begin
          u         <= sum2[63:0];
          saturated <= 1'b0;
          integ     <= inew2;
        end
      end
    end
  end
endmodule
