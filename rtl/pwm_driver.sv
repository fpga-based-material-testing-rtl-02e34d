// pwm_driver: pulse-width modulation output for DC motor actuators.
//
// The control value u (Q32.32) is taken as sign and magnitude: `dir` is its
// sign and the duty is |integer part of u| clock cycles, limited to the
// period. A counter runs from 0 to period-1; `pwm` is high while the counter
// is below the duty. New duty, direction and period are taken only when the
// counter wraps, so a pulse is never cut short. With `en` low the output is
// held low. The paper names a PWM driver for DC motors; the sign-magnitude
// mapping and update rule are this design's choices.
module pwm_driver
  import mtc_pkg::*;
#(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [CW-1:0] period,
  input  fix64_t        u,
  output logic          pwm,
  output logic          dir
);
  logic [CW-1:0] cnt, duty, per_q;
  logic [CW-1:0] duty_next;
  logic [31:0]   mag;

  always_comb begin
    if (u[63])
      mag = (u[63:32] == 32'h8000_0000) ? 32'h7FFF_FFFF : 32'(-$signed(u[63:32]));
    else
      mag = u[63:32];
    duty_next = (mag >= 32'(period)) ? period : mag[CW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; duty <= '0; per_q <= '0; dir <= 1'b0; pwm <= 1'b0;
    end else if (!en) begin
      cnt <= '0; duty <= '0; per_q <= '0; pwm <= 1'b0;
    end else begin
      if (cnt + 1'b1 >= per_q) begin
        cnt   <= '0;
        per_q <= period;
        duty  <= duty_next;
        dir   <= u[63];
        pwm   <= (duty_next != '0);
      end else begin
        cnt <= cnt + 1'b1;
        pwm <= (cnt + 1'b1 < duty);
      end
    end
  end
endmodule
