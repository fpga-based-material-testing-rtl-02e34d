// tb_dac_driver: sends control values through the DAC model and checks the
// received offset-binary code, the clamping at both ends, the frame length
// and the transfer time.
//
// 10 ns clock, 16-bit DAC. The expected code is computed in the testbench
// from the integer part of u and compared with the word the DAC model
// received. Width and protocol are this design's choice. A watchdog ends
// the run after 20000 cycles.
module tb_dac_driver;
  import mtc_pkg::*;
  localparam int unsigned BITS = 16, HALF = 2;
  logic clk = 0, rst_n = 0, load = 0;
  fix64_t u = '0;
  logic cs_n, sclk, sdi, busy;
  logic [BITS-1:0] code, got;
  int updates, nbits;
  int checks = 0, failures = 0;

  dac_driver #(.DAC_BITS(BITS), .SCLK_HALF(HALF)) dut (.clk, .rst_n, .load, .u, .cs_n, .sclk, .sdi, .busy, .code);
  dac_model #(.BITS(BITS)) dac (.cs_n, .sclk, .sdi, .code(got), .updates, .nbits);

  always #5 clk = !clk;

  function automatic logic [BITS-1:0] expect_code(fix64_t v);
    longint i;
    i = longint'($signed(v[63:32]));
    if (i > 32767) i = 32767;
    if (i < -32768) i = -32768;
    return 16'(i + 32768);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int cyc = 0, n0;
      case (t)
        0: u = 64'sd0;
        1: u = {32'sd40000, 32'h0};
        2: u = {-32'sd40000, 32'h0};
        3: u = {-32'sd1, 32'hFFFF_FFFF};
        default: u = {32'($signed(16'($urandom))), 32'($urandom)};
      endcase
      n0 = updates;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0; cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (updates != n0 + 1) begin failures++; $display("FAIL no update"); end
      checks++;
      if (got !== expect_code(u)) begin failures++; $display("FAIL code %h exp %h (u=%h)", got, expect_code(u), u); end
      checks++;
      if (code !== expect_code(u)) begin failures++; $display("FAIL code out %h", code); end
      checks++;
      if (nbits != BITS) begin failures++; $display("FAIL bits %0d", nbits); end
      checks++;
      if (cyc != 2 * HALF * BITS + 2) begin failures++; $display("FAIL transfer %0d cycles", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
