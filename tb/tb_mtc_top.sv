// tb_mtc_top: end-to-end test of the controller with three stations.
// Everything is configured through the configuration stream. Station 0 runs
// an open-loop sine, station 1 closes a PI loop around a first-order plant
// (ADC reading follows the DAC output), station 2 plays set points streamed
// over the CPU-to-FPGA stream. Result records are read from the
// FPGA-to-CPU stream and checked. The test also provokes an e-stop from a
// GPIO input, a stream underrun, dropped records under back-pressure, loop
// overruns, output clamping and a bad configuration write, counts each of
// these mechanisms and fails if one never happened.
//
// The loop divider is 400 cycles to keep the run short; all other
// parameters are the defaults. The plant and the checks are modelled in the
// testbench. A watchdog ends the run after 400000 cycles.
module tb_mtc_top;
  import mtc_pkg::*;
  localparam int unsigned N = 3, DIV = 400;
  localparam real TWO32 = 4294967296.0;
  logic clk = 0, rst_n = 0;
  logic [31:0] cfg_tdata = '0;
  logic cfg_tvalid = 0, cfg_tlast = 0, cfg_tready;
  logic [63:0] dmai_tdata = '0;
  logic [7:0]  dmai_tdest = '0;
  logic dmai_tvalid = 0, dmai_tready;
  logic [63:0] dmao_tdata;
  logic dmao_tvalid, dmao_tlast, dmao_tready = 1;
  logic [31:0] gpio_i = '0, gpio_o, gpio_oe;
  logic [N-1:0] adc_cnv, adc_sclk, adc_sdo, enc_a = '0, enc_b = '0, enc_z = '0;
  logic [N-1:0] dac_cs_n, dac_sclk, dac_sdi, pwm, pwm_dir, step, step_dir, active;
  logic loop_tick;
  logic [15:0] bad_writes, bad_dest, overruns [N], dropped [N];
  logic [31:0] adc_val [N];
  logic [15:0] dac_code [N];
  int dac_upd [N], dac_nb [N];
  int checks = 0, failures = 0;
  // mechanism counters
  int m_open = 0, m_closed = 0, m_stream = 0, m_estop = 0, m_underrun = 0, m_drop = 0;
  int m_overrun = 0, m_clamp = 0, m_badcfg = 0;
  // received records
  logic [63:0] beats [$];
  logic [63:0] last_rec [N][LOG_WORDS];
  int n_rec [N];
  int n_sine = 0, n_sine_ok = 0;
  logic [31:0] last_seq [N];

  mtc_top #(.N_ST(N), .N_GPIO(32), .LOOP_DIV(DIV), .ROM_AW(8), .ADC_CONV(16), .DEBOUNCE(4),
            .MUX_DEPTH(8)) dut (
    .clk, .rst_n, .cfg_tdata, .cfg_tvalid, .cfg_tlast, .cfg_tready,
    .dmai_tdata, .dmai_tdest, .dmai_tvalid, .dmai_tready,
    .dmao_tdata, .dmao_tvalid, .dmao_tlast, .dmao_tready,
    .gpio_i, .gpio_o, .gpio_oe, .adc_cnv, .adc_sclk, .adc_sdo, .enc_a, .enc_b, .enc_z,
    .dac_cs_n, .dac_sclk, .dac_sdi, .pwm, .pwm_dir, .step, .step_dir,
    .active, .loop_tick, .cfg_bad_writes(bad_writes), .dmai_bad_dest(bad_dest), .overruns, .dropped);

  for (genvar g = 0; g < N; g++) begin : g_models
    adc_model #(.BITS(32)) u_adc (.cnv(adc_cnv[g]), .sclk(adc_sclk[g]), .value(adc_val[g]), .sdo(adc_sdo[g]));
    dac_model #(.BITS(16)) u_dac (.cs_n(dac_cs_n[g]), .sclk(dac_sclk[g]), .sdi(dac_sdi[g]),
      .code(dac_code[g]), .updates(dac_upd[g]), .nbits(dac_nb[g]));
  end

  always #5 clk = !clk;

  // Plant of station 1: the reading moves a quarter of the way toward the
  // actuator command at every loop tick.
  always @(posedge loop_tick) begin
    int y, cmd;
    y = int'($signed(adc_val[1]));
    cmd = int'(dac_code[1]) - 32768;
    adc_val[1] = 32'(y + (cmd - y) / 4);
  end

  // Record receiver.
  always @(posedge clk) if (rst_n && dmao_tvalid && dmao_tready) begin
    beats.push_back(dmao_tdata);
    if (dmao_tlast) begin
      int st;
      st = int'(beats[0][55:48]);
      checks++;
      if (beats.size() != LOG_WORDS || beats[0][63:56] != LOG_MAGIC || st >= N) begin
        failures++; $display("FAIL malformed record");
      end else begin
        if (n_rec[st] > 0 && !beats[0][47]) begin
          checks++;
          if (beats[0][31:0] != last_seq[st] + 1) begin failures++; $display("FAIL seq gap on %0d", st); end
        end
        if (beats[0][47]) m_drop++;
        if (beats[0][32 + 4]) m_underrun++;
        if (beats[0][32 + 5]) m_clamp++;
        if (beats[0][32 + 3]) m_overrun++;
        if (beats[0][32 + 0] && !beats[0][32 + 1]) m_open++;
        if (beats[0][32 + 0] &&  beats[0][32 + 1]) m_closed++;
        if (beats[0][32 + 0] && st == 2 && !beats[0][32 + 4]) m_stream++;
        if (beats[0][32 + 2]) m_estop++;
        if (st == 0 && beats[0][32 + 0]) begin
          real sp;
          logic ok;
          sp = to_r(beats[1]);
          ok = 0;
          for (int k = 0; k < 16; k++)
            if (sp - 1000.0 * $sin(2.0 * 3.14159265358979 * k / 16.0) < 7.0 &&
                1000.0 * $sin(2.0 * 3.14159265358979 * k / 16.0) - sp < 7.0) ok = 1;
          n_sine++;
          if (ok) n_sine_ok++;
        end
        last_seq[st] = beats[0][31:0];
        for (int w = 0; w < LOG_WORDS; w++) last_rec[st][w] = beats[w];
        n_rec[st]++;
      end
      beats.delete();
    end
  end

  task automatic cfg_wr(input logic [7:0] st, input logic [7:0] r, input logic [31:0] d);
    @(negedge clk); cfg_tdata = {16'h0, st, r}; cfg_tvalid = 1; cfg_tlast = 0;
    @(negedge clk); cfg_tdata = d; cfg_tlast = 1;
    @(negedge clk); cfg_tvalid = 0; cfg_tlast = 0;
  endtask

  task automatic cfg_wr64(input logic [7:0] st, input logic [7:0] r_lo, input logic [63:0] d);
    cfg_wr(st, r_lo, d[31:0]);
    cfg_wr(st, r_lo + 8'd1, d[63:32]);
  endtask

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic periods(input int n);
    repeat (n * DIV) @(negedge clk);
  endtask

  function automatic real to_r(logic [63:0] v);
    return real'($signed(v)) / TWO32;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin adc_val[i] = 32'(100 * i); n_rec[i] = 0; last_seq[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // global: GPIO 0..7 outputs, acquisition on
    cfg_wr(8'hFF, G_GPIO_DIR, 32'h0000_00FF);
    cfg_wr(8'hFF, G_GPIO_OUT, 32'h0000_005A);
    check("gpio out", gpio_o & gpio_oe, 32'h5A);
    // station 0: open-loop sine, 16 points per period, amplitude 1000 around 0
    cfg_wr64(8'd0, R_AMP_LO, 64'(1000) << 32);
    cfg_wr(8'd0, R_FREQ_INC, 32'h1000_0000);
    cfg_wr(8'd0, R_ESTOP_MASK, 32'h0000_0100);     // GPIO 8 is this station's e-stop
    cfg_wr(8'd0, R_CTRL, 32'h0000_0321);           // run, open loop, SINE, dac+pwm
    // station 1: PI control to 1000 counts on the ADC, output limit 5000
    cfg_wr64(8'd1, R_OFFSET_LO, 64'(1000) << 32);
    cfg_wr(8'd1, R_KP, 32'h0000_8000);
    cfg_wr(8'd1, R_KI, 32'h0000_4000);
    cfg_wr64(8'd1, R_OMAX_LO, 64'(5000) << 32);
    cfg_wr64(8'd1, R_OMIN_LO, -(64'(5000) << 32));
    cfg_wr(8'd1, R_CTRL, 32'h0000_0303);           // run, closed loop, HOLD
    // station 2: streamed set points, open loop
    cfg_wr(8'd2, R_CTRL, 32'h0000_0351);           // run, STREAM, dac+pwm
    for (int k = 0; k < 6; k++) begin
      @(negedge clk); dmai_tdata = 64'(k * 100 + 7) << 32; dmai_tdest = 8'd2; dmai_tvalid = 1;
      #1 while (!dmai_tready) begin @(negedge clk); #1; end
    end
    @(negedge clk); dmai_tvalid = 0;
    cfg_wr(8'h05, R_KP, 32'd1);                    // no such station
    m_badcfg = int'(bad_writes);
    cfg_wr(8'hFF, G_ACQ_EN, 32'd1);

    periods(4);
    check("all active", active, 3'b111);
    // station 2 played the streamed points in order
    begin
      int p0;
      p0 = int'($signed(last_rec[2][1][63:32]));
      check("stream point in list", (p0 - 7) % 100, 0);
    end
    periods(4);
    check("stream drained: dac idle", dac_code[2], 32768 + 507);
    // station 0: every set point sent so far lies on the 16-point sine
    check("sine points seen", n_sine, n_sine_ok);
    check("sine records", n_sine > 4, 1);
    periods(30);
    // closed loop settled near the set point
    check("closed loop settled", (int'($signed(adc_val[1])) > 990 && int'($signed(adc_val[1])) < 1010), 1);
    check("closed loop record pv", int'($signed(last_rec[1][2][63:32])) > 990, 1);
    // e-stop on GPIO 8 stops station 0 only
    gpio_i[8] = 1;
    periods(3);
    check("e-stop stopped station 0", active[0], 0);
    check("station 1 still active", active[1], 1);
    check("station 0 output zero", dac_code[0], 32768);
    gpio_i[8] = 0;
    // back-pressure on the result stream: records dropped
    dmao_tready = 0;
    periods(3);
    dmao_tready = 1;
    periods(2);
    check("drops counted", dropped[1] > 0, 1);
    // loop faster than a point can be done: overruns
    cfg_wr(8'hFF, G_LOOP_DIV, 32'd60);
    periods(2);
    cfg_wr(8'hFF, G_LOOP_DIV, DIV);
    periods(2);
    check("overruns counted", overruns[1] > 0, 1);
    // loop rate: count ticks over a window
    begin
      int t;
      t = 0;
      repeat (10 * DIV) begin @(negedge clk); if (loop_tick) t++; end
      check("loop rate", t, 10);
    end

    check("records from every station", (n_rec[0] > 20) && (n_rec[1] > 20) && (n_rec[2] > 20), 1);
    $display("mechanisms: open=%0d closed=%0d stream=%0d underrun=%0d estop=%0d drop=%0d overrun=%0d clamp=%0d badcfg=%0d",
             m_open, m_closed, m_stream, m_underrun, m_estop, m_drop, m_overrun, m_clamp, m_badcfg);
    check("open loop happened", m_open > 0, 1);
    check("closed loop happened", m_closed > 0, 1);
    check("stream happened", m_stream > 0, 1);
    check("underrun happened", m_underrun > 0, 1);
    check("e-stop happened", m_estop > 0, 1);
    check("drop happened", m_drop > 0, 1);
    check("overrun happened", m_overrun > 0, 1);
    check("clamp happened", m_clamp > 0, 1);
    check("bad config happened", m_badcfg > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
