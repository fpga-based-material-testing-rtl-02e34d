// tb_encoder_driver: drives quadrature sequences forward and backward with
// random dwell times, an illegal double transition and an index pulse, and
// checks position, error count and the captured index position.
//
// 10 ns clock; each quadrature state is held several cycles to pass the
// synchronisers. The expected count is kept by the testbench as it drives
// the sequence. 4x decoding is this design's choice. A watchdog ends the run
// after 100000 cycles.
module tb_encoder_driver;
  import mtc_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, a = 0, b = 0, z = 0;
  sample_t pos, ipos;
  logic [15:0] errors;
  int checks = 0, failures = 0;
  int expected = 0;
  logic [1:0] gray [4] = '{2'b00, 2'b01, 2'b11, 2'b10};
  int ph = 0;

  encoder_driver dut (.clk, .rst_n, .clear, .enc_a(a), .enc_b(b), .enc_z(z),
    .position(pos), .index_pos(ipos), .errors);

  always #5 clk = !clk;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic move(input int dir);
    ph = (ph + dir + 4) % 4;
    {a, b} = gray[ph];
    expected += dir;
    repeat ($urandom_range(1, 4)) @(negedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 1000; i++) move(1);
    repeat (4) @(negedge clk);
    check("forward", pos, expected);
    for (int i = 0; i < 1500; i++) move(-1);
    repeat (4) @(negedge clk);
    check("backward", pos, expected);
    for (int i = 0; i < 2000; i++) move(($urandom_range(0, 2) == 0) ? -1 : 1);
    repeat (4) @(negedge clk);
    check("random walk", pos, expected);
    // index pulse captures the position
    z = 1; repeat (4) @(negedge clk); z = 0;
    check("index", ipos, expected);
    // illegal jump by two Gray steps
    ph = (ph + 2) % 4; {a, b} = gray[ph];
    repeat (4) @(negedge clk);
    check("error count", int'(errors), 1);
    check("position kept", pos, expected);
    clear = 1; @(negedge clk); clear = 0;
    expected = 0;
    for (int i = 0; i < 37; i++) move(1);
    repeat (4) @(negedge clk);
    check("after clear", pos, expected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
