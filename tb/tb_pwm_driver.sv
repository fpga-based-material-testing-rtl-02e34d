// tb_pwm_driver: applies control values of both signs, including values
// beyond the period and the most negative value, and measures high time,
// period and direction over whole PWM periods.
//
// Period 50 cycles to keep the run short; the expected high time is
// min(|int(u)|, period), computed in the testbench. Sign-magnitude PWM is
// this design's choice. A watchdog ends the run.
module tb_pwm_driver;
  import mtc_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] period = 16'd50;
  fix64_t u = '0;
  logic pwm, dir;
  int checks = 0, failures = 0;

  pwm_driver #(.CW(16)) dut (.clk, .rst_n, .en, .period, .u, .pwm, .dir);

  always #5 clk = !clk;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // Measure high cycles over 4 whole periods once the new value is in use.
  task automatic measure(input fix64_t val, input int per, input int exp_duty, input logic exp_dir);
    int high = 0;
    u = val; period = 16'(per);
    repeat (3 * per + 2) @(negedge clk);
    for (int i = 0; i < 4 * per; i++) begin
      if (pwm) high++;
      @(negedge clk);
    end
    check("high time", high, 4 * exp_duty);
    check("dir", int'(dir), int'(exp_dir));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1; en = 1;
    measure({32'sd20, 32'h8000_0000}, 50, 20, 0);
    measure({-32'sd13, 32'h0}, 50, 13, 1);
    measure({32'sd500, 32'h0}, 50, 50, 0);
    measure(64'sd0, 50, 0, 0);
    measure(FIX64_MIN, 40, 40, 1);
    measure({32'sd7, 32'h0}, 10, 7, 0);
    en = 0; repeat (5) @(negedge clk);
    check("disabled low", int'(pwm), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
