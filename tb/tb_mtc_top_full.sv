// tb_mtc_top_full: the controller at its default size (16 stations, loop
// divider 1000 = 100 kHz at a 100 MHz clock). Even stations run an
// open-loop hold level of 100*i counts, odd stations a P loop (Kp = 0.5)
// on a plant whose reading follows the DAC output. After the loop has run
// for several periods every station must have delivered one record per
// loop period with no drops, the even DAC outputs must equal their levels,
// and the odd loops must sit where P control settles (r - y = y / 0.5 ...
// i.e. y = r * Kp / (1 + Kp) for this unit-gain plant).
//
// All parameters of mtc_top are at their defaults (no parameter list). A
// watchdog ends the run if the records stop arriving.
module tb_mtc_top_full;
  import mtc_pkg::*;
  localparam int unsigned N = 16, DIV = 1000, RUN = 40;
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
  int n_rec [N];
  int beats_in = 0;
  logic [63:0] hdr = '0;

  mtc_top dut (
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

  // odd stations: the reading becomes the last actuator command
  always @(posedge loop_tick)
    for (int i = 1; i < N; i += 2) adc_val[i] = 32'(int'(dac_code[i]) - 32768);

  always @(posedge clk) if (rst_n && dmao_tvalid && dmao_tready) begin
    if (beats_in == 0) hdr = dmao_tdata;
    beats_in++;
    if (dmao_tlast) begin
      checks++;
      if (beats_in != LOG_WORDS || hdr[63:56] != LOG_MAGIC) begin failures++; $display("FAIL record framing"); end
      n_rec[int'(hdr[55:48]) % N]++;
      beats_in = 0;
    end
  end

  task automatic cfg_wr(input logic [7:0] st, input logic [7:0] r, input logic [31:0] d);
    @(negedge clk); cfg_tdata = {16'h0, st, r}; cfg_tvalid = 1; cfg_tlast = 0;
    @(negedge clk); cfg_tdata = d; cfg_tlast = 1;
    @(negedge clk); cfg_tvalid = 0; cfg_tlast = 0;
  endtask

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat ((RUN + 20) * DIV) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin adc_val[i] = 32'd0; n_rec[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      if (i % 2 == 0) begin
        cfg_wr(8'(i), R_OFFSET_HI, 32'(100 * i));
        cfg_wr(8'(i), R_CTRL, 32'h0000_0301);      // run, open loop, HOLD
      end else begin
        cfg_wr(8'(i), R_OFFSET_HI, 32'(1200));
        cfg_wr(8'(i), R_KP, 32'h0000_8000);
        cfg_wr(8'(i), R_CTRL, 32'h0000_0303);      // run, closed loop, HOLD
      end
    end
    cfg_wr(8'hFF, G_ACQ_EN, 32'd1);
    repeat (5 * DIV) @(negedge clk);
    for (int i = 0; i < N; i++) n_rec[i] = 0;
    begin
      int ticks;
      ticks = 0;
      repeat (RUN * DIV) begin @(negedge clk); if (loop_tick) ticks++; end
      check("100 kHz loop: ticks per 1000 cycles", ticks, RUN);
    end
    repeat (50) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      check($sformatf("records of station %0d", i), n_rec[i] >= RUN - 1 && n_rec[i] <= RUN + 1, 1);
      check($sformatf("drops of station %0d", i), dropped[i], 0);
      check($sformatf("overruns of station %0d", i), overruns[i], 0);
      check($sformatf("active %0d", i), active[i], 1);
      if (i % 2 == 0) check($sformatf("dac of station %0d", i), dac_code[i], 32768 + 100 * i);
      else            check($sformatf("P loop of station %0d", i), int'($signed(adc_val[i])), 400);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
