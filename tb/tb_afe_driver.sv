// tb_afe_driver: reads random 32-bit values from the ADC model and checks
// the sample, the conversion pulse length, the number of serial clocks and
// the start-to-valid latency.
//
// 10 ns clock; the conversion time is cut to 10 cycles to keep the run short.
// Expected values come from the ADC model's input word, not from the driver.
// The 32-bit width follows the paper; the protocol is this design's own.
// A watchdog ends the run after 20000 cycles.
module tb_afe_driver;
  import mtc_pkg::*;
  localparam int unsigned CONV = 10, HALF = 2, BITS = 32;
  localparam int unsigned LAT  = CONV + 2 * HALF * BITS + 1;
  logic clk = 0, rst_n = 0, start = 0;
  logic cnv, sclk, sdo, valid, busy;
  sample_t sample;
  logic [31:0] value = '0;
  int checks = 0, failures = 0, sclk_edges = 0, cnv_cycles = 0;

  afe_driver #(.DATA_BITS(BITS), .SCLK_HALF(HALF), .CONV_CYCLES(CONV)) dut (
    .clk, .rst_n, .start, .cnv, .sclk, .sdo, .sample, .valid, .busy);
  adc_model #(.BITS(32)) adc (.cnv, .sclk, .value, .sdo);

  always #5 clk = !clk;
  always @(posedge sclk) sclk_edges++;
  always @(posedge clk) if (cnv) cnv_cycles++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int lat;
      value = (t == 0) ? 32'h8000_0001 : (t == 1) ? 32'h7FFF_FFFF : $urandom;
      sclk_edges = 0; cnv_cycles = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      // a second start while busy must be ignored
      start = 1; @(negedge clk); start = 0; lat++;
      while (!valid) begin @(negedge clk); lat++; end
      checks++;
      if (sample !== sample_t'(value)) begin failures++; $display("FAIL sample %h exp %h", sample, value); end
      checks++;
      if (lat != LAT) begin failures++; $display("FAIL latency %0d exp %0d", lat, LAT); end
      checks++;
      if (sclk_edges != BITS) begin failures++; $display("FAIL sclk edges %0d", sclk_edges); end
      checks++;
      if (cnv_cycles != CONV) begin failures++; $display("FAIL cnv cycles %0d", cnv_cycles); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL still busy"); end
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
