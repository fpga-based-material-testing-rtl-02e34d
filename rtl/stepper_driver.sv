// stepper_driver: step / direction pulse generator for stepper motors.
//
// The magnitude of the integer part of the control value u is a frequency
// tuning word: it is added every clock to a 32-bit phase accumulator and
// each carry out starts one `step` pulse, so the step rate is
// |u_int| * f_clk / 2^32 (at most one pulse every 2*PULSE+1 cycles). `dir` is
// the sign of u and is only changed while no pulse is high. `position`
// counts the steps issued, up for dir = 0. With `en` low no steps are made.
// The paper only names a stepper driver; everything here is this design's
// choice.
module stepper_driver
  import mtc_pkg::*;
#(
  parameter int unsigned PULSE = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    clear,
  input  fix64_t  u,
  output logic    step,
  output logic    dir,
  output sample_t position
);
  logic [31:0] acc, ftw;
  logic [32:0] acc_sum;
  logic [15:0] hcnt;       // cycles left in the present pulse high / low
  logic        pending;

  always_comb begin
    if (u[63])
      ftw = (u[63:32] == 32'h8000_0000) ? 32'h7FFF_FFFF : 32'(-$signed(u[63:32]));
    else
      ftw = u[63:32];
    if (ftw > 32'h7FFF_FFFF / PULSE) ftw = 32'h7FFF_FFFF / PULSE;
  end
  assign acc_sum = {1'b0, acc} + {1'b0, ftw};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; hcnt <= '0; pending <= 1'b0;
      step <= 1'b0; dir <= 1'b0; position <= '0;
    end else begin
      if (clear) position <= '0;
      if (!en) begin
        acc <= '0; pending <= 1'b0;
      end else begin
        acc <= acc_sum[31:0];
        if (acc_sum[32]) pending <= 1'b1;
      end
      if (hcnt != 0) begin
        hcnt <= hcnt - 1'b1;
        if (hcnt == 16'(PULSE + 1)) step <= 1'b0;
      end else if (pending && en) begin
        step    <= 1'b1;
        hcnt    <= 16'(2 * PULSE);
        pending <= acc_sum[32];
        if (!clear) position <= dir ? position - 1 : position + 1;
      end else if (!step) begin
        dir <= u[63];
      end
    end
  end
endmodule
