// tb_gpio_driver: checks the output and direction paths and the debounce
// filter: a pulse shorter than DEBOUNCE cycles must not pass, a level held
// long enough must appear after DEBOUNCE + 2 cycles.
//
// 8 pins and a 6-cycle debounce to keep the run short. The latency is
// measured in clock cycles against DEBOUNCE + 2. The debounce is this
// design's own addition. A watchdog ends the run after 2000 cycles.
module tb_gpio_driver;
  localparam int unsigned N = 8, DB = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] out_val = '0, dir = '0, pin_i = '0, pin_o, pin_oe, in_q;
  int checks = 0, failures = 0;

  gpio_driver #(.N(N), .DEBOUNCE(DB)) dut (.clk, .rst_n, .out_val, .dir, .pin_i, .pin_o, .pin_oe, .in_q);

  always #5 clk = !clk;

  task automatic check(input string what, input logic [N-1:0] got, input logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      out_val = N'($urandom); dir = N'($urandom);
      @(negedge clk);
      check("pin_o", pin_o, out_val);
      check("pin_oe", pin_oe, dir);
    end
    // short glitch on bit 0
    pin_i = 8'h01;
    repeat (DB - 2) @(negedge clk);
    pin_i = 8'h00;
    repeat (DB + 6) @(negedge clk);
    check("glitch filtered", in_q, 8'h00);
    // stable level on bits 3 and 5: count the latency
    pin_i = 8'h28;
    begin
      int lat = 0;
      while (in_q != 8'h28 && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != DB + 2) begin failures++; $display("FAIL latency %0d exp %0d", lat, DB + 2); end
    end
    check("level passed", in_q, 8'h28);
    // bouncing release: toggles every 2 cycles, then settles low
    for (int i = 0; i < 6; i++) begin pin_i = (i % 2) ? 8'h28 : 8'h20; repeat (2) @(negedge clk); end
    check("bounce ignored", in_q, 8'h28);
    pin_i = 8'h20;
    repeat (DB + 4) @(negedge clk);
    check("settled", in_q, 8'h20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
