// tb_pid_ctrl: feeds random set point / process variable sequences and
// compares every output with a reference PID written in wide integer
// arithmetic in the testbench, including clamping at the limits, the
// conditional-integration rule and `clear`. Checks the 3-cycle latency.
//
// 10 ns clock; one input per few cycles, each result checked after the
// 3-cycle latency. The PID form
// (with feed-forward, anti-windup and Q16.16 gains) is this design's own;
// the paper only names PID control. A watchdog ends the run.
module tb_pid_ctrl;
  import mtc_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  fix64_t sp = '0, pv = '0, omin, omax, u;
  gain_t kp, ki, kd, kff;
  logic out_valid, saturated;
  int checks = 0, failures = 0;
  int n_sat = 0;

  // reference state
  longint r_int, r_eprev;

  pid_ctrl dut (.clk, .rst_n, .clear, .in_valid, .setpoint(sp), .pv, .kp, .ki, .kd, .kff,
    .out_min(omin), .out_max(omax), .u, .out_valid, .saturated);

  always #5 clk = !clk;

  // Reference: values small enough that no 64-bit saturation occurs.
  function automatic longint mulsh(longint a, gain_t g);
    logic signed [127:0] p;
    p = 128'(a) * 128'(g);
    return longint'(p >>> 16);
  endfunction

  task automatic step_ref(input longint r, input longint y, output longint uo, output logic so);
    longint e, de, p, it, d, f, inew, sum;
    e = r - y; de = e - r_eprev; r_eprev = e;
    p = mulsh(e, kp); it = mulsh(e, ki); d = mulsh(de, kd); f = mulsh(r, kff);
    inew = r_int + it;
    sum = p + inew + d + f;
    if (sum > omax) begin uo = omax; so = 1; if (it <= 0) r_int = inew; end
    else if (sum < omin) begin uo = omin; so = 1; if (it >= 0) r_int = inew; end
    else begin uo = sum; so = 0; r_int = inew; end
  endtask

  task automatic do_point(input longint r, input longint y);
    longint ue; logic se; int lat;
    step_ref(r, y, ue, se);
    @(negedge clk); sp = r; pv = y; in_valid = 1;
    @(negedge clk); in_valid = 0; lat = 1;
    while (!out_valid && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
    checks++;
    if (u !== ue || saturated !== se) begin
      failures++; $display("FAIL u=%0d sat=%0d expected %0d %0d", u, saturated, ue, se);
    end
    if (saturated) n_sat++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    r_int = 0; r_eprev = 0;
    kp = 32'sh0001_8000; ki = 32'sh0000_2000; kd = 32'sh0000_4000; kff = 32'sh0000_1000;
    omin = -(64'sd50000 <<< 32); omax = 64'sd50000 <<< 32;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random small-signal points
    for (int k = 0; k < 200; k++)
      do_point(longint'($signed($urandom_range(0, 2000000))) * 4096 - 64'sd4000000000,
               longint'($signed($urandom_range(0, 2000000))) * 4096 - 64'sd4000000000);
    // a large constant error drives the output into the upper limit
    for (int k = 0; k < 30; k++) do_point(64'sd40000 <<< 32, 64'sd0);
    // reverse error: integrator winds back, lower limit reached
    for (int k = 0; k < 60; k++) do_point(-(64'sd40000 <<< 32), 64'sd0);
    // random gains, including negative ones
    kp = 32'($signed($urandom_range(0, 200000)) - 100000);
    ki = 32'($signed($urandom_range(0, 20000)) - 10000);
    for (int k = 0; k < 100; k++)
      do_point(longint'($signed($urandom_range(0, 2000000))) * 8192 - 64'sd8000000000, 64'sd12345);
    // clear empties the integrator and the stored error
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    r_int = 0; r_eprev = 0;
    for (int k = 0; k < 20; k++) do_point(64'sd1000 <<< 32, 64'sd990 <<< 32);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL limits never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
