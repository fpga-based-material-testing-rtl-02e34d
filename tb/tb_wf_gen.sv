// tb_wf_gen: runs every profile of the waveform generator and compares each
// point with a model written with real arithmetic (sine, triangle, square,
// sweep and taper) or exact integer steps (hold, ramp, stream); checks the
// three-cycle step-to-valid latency and the process-variable selection.
//
// 10-bit table (the default). Real-arithmetic points are compared within a
// tolerance that covers the table step; integer profiles must match exactly.
// The profile set follows the paper; their formulas are this design's own.
// A watchdog ends the run.
module tb_wf_gen;
  import mtc_pkg::*;
  localparam real TWO32 = 4294967296.0;
  localparam real PI    = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  station_cfg_t cfg;
  logic [63:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready, valid, underrun;
  sample_t afe = -32'sd77, enc = 32'sd4242;
  fix64_t setpoint, pv;
  int checks = 0, failures = 0;

  wf_gen #(.ROM_AW(10)) dut (.clk, .rst_n, .cfg, .start, .step, .s_tdata, .s_tvalid, .s_tready,
    .afe_sample(afe), .enc_pos(enc), .setpoint, .pv, .valid, .underrun);

  always #5 clk = !clk;

  function automatic real to_r(fix64_t v);
    return real'(v) / TWO32;
  endfunction

  function automatic fix64_t fx(real v);
    return fix64_t'(longint'(v * TWO32));
  endfunction

  task automatic check_near(input string what, input real got, input real exp, input real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++; $display("FAIL %s: got %f expected %f (tol %f)", what, got, exp, tol);
    end
  endtask

  // One point: pulse step, wait for valid, check the latency.
  task automatic point(input logic with_start);
    int lat;
    @(negedge clk); step = 1; start = with_start;
    @(negedge clk); step = 0; start = 0; lat = 1;
    while (!valid && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
  endtask

  function automatic real tri_ref(real p);   // p in [0,1)
    if (p < 0.25)      return 4.0 * p;
    else if (p < 0.75) return 2.0 - 4.0 * p;
    else               return 4.0 * p - 4.0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real off, amp, ph, fr, tol;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // HOLD and PV selection
    cfg.profile = PROF_HOLD; cfg.offset = fx(123.5); cfg.pv_sel = PV_AFE;
    point(1);
    check_near("hold", to_r(setpoint), 123.5, 0.0);
    check_near("pv afe", to_r(pv), -77.0, 0.0);
    cfg.pv_sel = PV_ENC;
    point(0);
    check_near("pv enc", to_r(pv), 4242.0, 0.0);

    // SINE, 64 points per period
    off = 1000.0; amp = 5000.0;
    cfg.profile = PROF_SINE; cfg.offset = fx(off); cfg.amplitude = fx(amp);
    cfg.freq_inc = 32'h0400_0000;
    tol = amp * 0.0016;
    for (int k = 0; k < 80; k++) begin
      point(k == 0);
      check_near("sine", to_r(setpoint), off + amp * $sin(2.0 * PI * real'(k % 64) / 64.0), tol);
    end

    // SQUARE
    cfg.profile = PROF_SQUARE;
    for (int k = 0; k < 64; k++) begin
      point(k == 0);
      check_near("square", to_r(setpoint), off + ((k < 32) ? amp : -amp), amp * 1e-6);
    end

    // TRIANGLE
    cfg.profile = PROF_TRIANGLE;
    for (int k = 0; k < 64; k++) begin
      point(k == 0);
      check_near("triangle", to_r(setpoint), off + amp * tri_ref(real'(k) / 64.0), amp * 1e-6);
    end

    // SWEEP and TAPER together: frequency and amplitude change each point
    cfg.profile = PROF_SINE; cfg.freq_inc = 32'h0100_0000; cfg.freq_step = 32'h0008_0000;
    cfg.amp_step = fx(-10.0);
    ph = 0.0; fr = real'(32'h0100_0000);
    for (int k = 0; k < 100; k++) begin
      real a;
      point(k == 0);
      a = amp - 10.0 * k;
      check_near("sweep/taper", to_r(setpoint), off + a * $sin(2.0 * PI * ph / TWO32), amp * 0.0016);
      ph = ph + fr; if (ph >= TWO32) ph = ph - TWO32;
      fr = fr + real'(32'h0008_0000);
    end
    cfg.freq_step = 0; cfg.amp_step = 0;

    // RAMP from the present set point to the target
    cfg.profile = PROF_RAMP; cfg.offset = fx(200.0); cfg.ramp_rate = fx(37.25);
    begin
      real cur, target;
      cur = to_r(setpoint); target = 200.0;
      for (int k = 0; k < 200; k++) begin
        point(k == 0);
        if (target - cur > 37.25) cur = cur + 37.25;
        else if (cur - target > 37.25) cur = cur - 37.25;
        else cur = target;
        check_near("ramp", to_r(setpoint), cur, 0.0);
      end
    end

    // STREAM: points from the CPU, and an underrun
    cfg.profile = PROF_STREAM;
    for (int k = 0; k < 10; k++) begin
      logic got_ready;
      s_tdata = {32'(k * 1000), 32'h8000_0000}; s_tvalid = 1;
      @(negedge clk); step = 1;
      #1 got_ready = s_tready;
      @(negedge clk); step = 0; s_tvalid = 0;
      checks++; if (!got_ready) begin failures++; $display("FAIL tready"); end
      repeat (3) @(negedge clk);
      check_near("stream", to_r(setpoint), real'(k * 1000) + 0.5, 0.0);
    end
    begin
      logic saw;
      saw = 0;
      @(negedge clk); step = 1;
      @(negedge clk); step = 0;
      repeat (4) begin if (underrun) saw = 1; @(negedge clk); end
      checks++; if (!saw) begin failures++; $display("FAIL no underrun"); end
      check_near("stream hold", to_r(setpoint), 9000.5, 0.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
