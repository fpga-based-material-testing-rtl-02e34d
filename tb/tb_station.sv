// tb_station: one station with the ADC and DAC models. Runs the per-tick
// test flow in open loop (hold level to the DAC), closed loop (P control on
// the ADC sample and on the encoder), CPU-streamed set points, an e-stop
// that ends the test, a restart, and loop overruns, checking DAC codes,
// PWM direction, result records and the tick-to-record latency.
//
// Loop period 400 cycles; an 8-cycle conversion, a 256-entry sine table and
// clk/2 serial clocks keep the run short (the 16-bit DAC is the default). Expected DAC codes and records are computed from the
// configuration in the testbench. The flow order follows the paper's test
// flow chart; the decision rule (run bit, e-stop mask) is this design's
// own. A watchdog ends the run.
module tb_station;
  import mtc_pkg::*;
  localparam int unsigned PERIOD = 400;
  logic clk = 0, rst_n = 0, tick = 0;
  station_cfg_t cfg;
  logic [31:0] gpio_in = '0;
  logic adc_cnv, adc_sclk, adc_sdo;
  logic [31:0] adc_value = 32'd200;
  logic enc_a = 0, enc_b = 0, enc_z = 0;
  logic [63:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready;
  logic dac_cs_n, dac_sclk, dac_sdi, pwm, pwm_dir, step, step_dir, rec_valid, active;
  log_rec_t rec;
  logic [15:0] overruns, dac_code;
  int dac_updates, dac_bits;
  int checks = 0, failures = 0, records = 0, last_lat = 0;
  int tick_time = 0, cyc = 0;

  station #(.ROM_AW(8), .ADC_BITS(32), .ADC_CONV(8), .DAC_BITS(16), .SCLK_HALF(1), .STEP_PULSE(4)) dut (
    .clk, .rst_n, .tick, .cfg, .gpio_in, .adc_cnv, .adc_sclk, .adc_sdo, .enc_a, .enc_b, .enc_z,
    .s_tdata, .s_tvalid, .s_tready, .dac_cs_n, .dac_sclk, .dac_sdi, .pwm, .pwm_dir, .step, .step_dir,
    .rec, .rec_valid, .active, .overruns);
  adc_model #(.BITS(32)) adc (.cnv(adc_cnv), .sclk(adc_sclk), .value(adc_value), .sdo(adc_sdo));
  dac_model #(.BITS(16)) dac (.cs_n(dac_cs_n), .sclk(dac_sclk), .sdi(dac_sdi), .code(dac_code),
    .updates(dac_updates), .nbits(dac_bits));

  always #5 clk = !clk;
  always @(posedge clk) begin
    cyc++;
    if (tick) tick_time = cyc;
    if (rec_valid) begin records++; last_lat = cyc - tick_time; end
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // One loop period: a tick, then wait for the record and the DAC frame.
  task automatic loop_point();
    int r0;
    r0 = records;
    @(negedge clk); tick = 1;
    @(negedge clk); tick = 0;
    repeat (PERIOD - 2) @(negedge clk);
    check("one record per tick", records, r0 + 1);
  endtask

  function automatic fix64_t fx(longint i);
    return fix64_t'(i <<< 32);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.out_min = FIX64_MIN; cfg.out_max = FIX64_MAX;
    cfg.pwm_period = 16'd100; cfg.dac_en = 1; cfg.pwm_en = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // acquisition without a test: zero output, records flagged inactive
    loop_point();
    check("idle active", active, 0);
    check("idle record flags", rec.flags[0], 0);
    check("idle afe", rec.afe, 200);
    check("idle dac", dac_code, 32768);

    // open loop, hold profile
    cfg.profile = PROF_HOLD; cfg.offset = fx(1234); cfg.run = 1;
    loop_point();
    check("active", active, 1);
    check("open-loop u", rec.u, fx(1234));
    check("open-loop dac", dac_code, 1234 + 32768);
    check("open-loop flags", rec.flags[1:0], 2'b01);
    check("latency below period", last_lat < PERIOD, 1);
    check("dac frame bits", dac_bits, 16);

    // closed loop P control on the ADC sample: u = 1.5 * (500 - 200)
    cfg.closed_loop = 1; cfg.kp = 32'sh0001_8000; cfg.offset = fx(500);
    loop_point();
    check("closed-loop u", rec.u, fx(450));
    check("closed-loop pv", rec.pv, fx(200));
    check("closed-loop dac", dac_code, 450 + 32768);
    check("closed-loop flags", rec.flags[1:0], 2'b11);
    // process variable above the set point: negative output, PWM reverses
    adc_value = 32'd900;
    loop_point();
    check("negative u", rec.u, -fx(600));
    check("pwm dir", pwm_dir, 1);

    // closed loop on the encoder: move it +10 counts
    cfg.pv_sel = PV_ENC; cfg.kp = 32'sh0001_0000; cfg.offset = fx(30);
    for (int i = 0; i < 10; i++) begin
      case (i % 4) 0: {enc_a, enc_b} = 2'b01; 1: {enc_a, enc_b} = 2'b11; 2: {enc_a, enc_b} = 2'b10; default: {enc_a, enc_b} = 2'b00; endcase
      repeat (3) @(negedge clk);
    end
    loop_point();
    check("encoder pv", rec.pv, fx(10));
    check("encoder u", rec.u, fx(20));

    // CPU-streamed set points in open loop
    cfg.closed_loop = 0; cfg.profile = PROF_STREAM; cfg.pv_sel = PV_AFE;
    s_tdata = fx(-321); s_tvalid = 1;
    loop_point();
    s_tvalid = 0;
    check("stream u", rec.u, -fx(321));
    check("stream dac", dac_code, 32768 - 321);
    loop_point();
    check("stream underrun flag", rec.flags[4], 1);

    // e-stop on GPIO 3 ends the test
    cfg.profile = PROF_HOLD; cfg.offset = fx(777); cfg.estop_mask = 32'h8;
    loop_point();
    check("before e-stop", dac_code, 777 + 32768);
    gpio_in = 32'h8;
    loop_point();
    check("e-stop inactive", active, 0);
    check("e-stop output zero", dac_code, 32768);
    check("e-stop flag", rec.flags[2], 1);
    gpio_in = 32'h0;
    loop_point();
    check("stays ended", active, 0);
    // restart needs a new rising edge of run
    cfg.run = 0; loop_point();
    cfg.run = 1; loop_point();
    check("restarted", active, 1);
    check("restart output", dac_code, 777 + 32768);

    // ticks faster than one point: overruns counted and flagged
    begin
      int o0;
      o0 = overruns;
      for (int i = 0; i < 10; i++) begin
        @(negedge clk); tick = 1; @(negedge clk); tick = 0;
        repeat (40) @(negedge clk);
      end
      repeat (PERIOD) @(negedge clk);
      check("overruns counted", overruns > o0, 1);
    end
    check("record sequence", rec.seq, records - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
