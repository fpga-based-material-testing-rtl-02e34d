// tb_stepper_driver: counts step pulses for several tuning words over a
// fixed window and compares with |u| * cycles / 2^32, checks direction,
// pulse width and the step position counter.
//
// 4-cycle pulses to keep the run short; the expected step count over a
// window is |u| * cycles / 2^32 (plus or minus one). The NCO step generator
// is this design's choice. A watchdog ends the run.
module tb_stepper_driver;
  import mtc_pkg::*;
  localparam int unsigned PULSE = 4;
  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  fix64_t u = '0;
  logic step, dir;
  sample_t position;
  int checks = 0, failures = 0, steps = 0, width = 0, bad_width = 0;

  stepper_driver #(.PULSE(PULSE)) dut (.clk, .rst_n, .en, .clear, .u, .step, .dir, .position);

  always #5 clk = !clk;
  always @(posedge clk) if (rst_n) begin
    if (step) width++;
    else if (width != 0) begin
      if (width != PULSE) begin bad_width++; $display("width %0d at %0t", width, $time); end
      width = 0;
      steps++;
    end
  end

  task automatic run(input int rate_int, input int cycles);
    longint exp;
    int s0, p0;
    u = {32'(rate_int), 32'h0};
    repeat (100) @(negedge clk);
    s0 = steps; p0 = position;
    repeat (cycles) @(negedge clk);
    exp = (longint'(rate_int < 0 ? -rate_int : rate_int) * cycles) >>> 32;
    checks++;
    if ((steps - s0) < exp - 1 || (steps - s0) > exp + 1) begin
      failures++; $display("FAIL rate %0d: %0d steps, expected %0d", rate_int, steps - s0, exp);
    end
    checks++;
    if (int'(dir) != int'(rate_int < 0)) begin failures++; $display("FAIL dir"); end
    checks++;
    if ((position - p0) != ((rate_int < 0) ? -(steps - s0) : (steps - s0)) &&
        (position - p0) != ((rate_int < 0) ? -(steps - s0) - 1 : (steps - s0) + 1)) begin
      failures++; $display("FAIL position moved %0d for %0d steps", position - p0, steps - s0);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1; en = 1;
    run(32'sh0100_0000, 20000);       // 1/256 per cycle
    run(-32'sh0200_0000, 20000);
    run(32'sh0800_0000, 20000);       // 1/32
    run(32'sh0000_0000, 5000);
    checks++;
    if (bad_width != 0) begin failures++; $display("FAIL %0d pulses of wrong width", bad_width); end
    u = {32'sh0100_0000, 32'h0};
    repeat (100) @(negedge clk);
    en = 0;
    repeat (3 * PULSE) @(negedge clk);
    begin
      int s0;
      s0 = steps;
      repeat (3000) @(negedge clk);
      checks++;
      if (steps != s0) begin failures++; $display("FAIL steps while disabled"); end
    end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (position != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
