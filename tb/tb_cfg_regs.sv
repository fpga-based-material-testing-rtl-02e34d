// tb_cfg_regs: writes station and global registers over the configuration
// stream and checks the decoded fields, the unknown-address counter and the
// re-alignment of the (address, data) pairs on tlast.
//
// 4 stations, 10 ns clock. Expected fields are worked out from the written
// words with the register map of the package. The register map is this
// design's own; the paper only says configuration arrives over a FIFO
// stream. A watchdog ends the run after 200 cycles.
module tb_cfg_regs;
  import mtc_pkg::*;
  localparam int unsigned N_ST = 4;
  logic clk = 0, rst_n = 0;
  logic [31:0] tdata = '0;
  logic tvalid = 0, tlast = 0, tready;
  station_cfg_t st_cfg [N_ST];
  global_cfg_t  g_cfg;
  logic [15:0]  bad;
  int checks = 0, failures = 0;

  cfg_regs #(.N_ST(N_ST), .LOOP_DIV(1000)) dut (.clk, .rst_n, .s_tdata(tdata), .s_tvalid(tvalid),
    .s_tlast(tlast), .s_tready(tready), .st_cfg, .g_cfg, .bad_writes(bad));

  always #5 clk = !clk;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic send(input logic [31:0] w, input logic last);
    @(negedge clk); tdata = w; tvalid = 1; tlast = last;
    @(negedge clk); tvalid = 0; tlast = 0;
  endtask

  task automatic wr(input logic [7:0] st, input logic [7:0] r, input logic [31:0] d);
    send({16'h0, st, r}, 0);
    send(d, 1);
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset loop_div", 64'(g_cfg.loop_div), 64'd1000);
    check("reset out_max", st_cfg[2].out_max, FIX64_MAX);
    check("reset pwm_period", 64'(st_cfg[1].pwm_period), 64'd1000);
    check("tready", 64'(tready), 64'd1);
    wr(8'd2, R_CTRL, 32'h0000_0753);   // run, closed, pv_enc? bit2=0, profile 5, dac, pwm, step
    check("run", 64'(st_cfg[2].run), 1);
    check("closed", 64'(st_cfg[2].closed_loop), 1);
    check("pv_sel", 64'(st_cfg[2].pv_sel), 0);
    check("profile", 64'(st_cfg[2].profile), 64'(PROF_STREAM));
    check("dac_en", 64'(st_cfg[2].dac_en), 1);
    check("pwm_en", 64'(st_cfg[2].pwm_en), 1);
    check("step_en", 64'(st_cfg[2].step_en), 1);
    check("other station untouched", 64'(st_cfg[1].run), 0);
    wr(8'd3, R_OFFSET_LO, 32'h89AB_CDEF);
    wr(8'd3, R_OFFSET_HI, 32'h0123_4567);
    check("offset", st_cfg[3].offset, 64'h0123_4567_89AB_CDEF);
    wr(8'd0, R_KP, 32'hFFFF_8000);
    check("kp", 64'(st_cfg[0].kp), 64'hFFFF_FFFF_FFFF_8000);
    wr(8'd0, R_ESTOP_MASK, 32'h0000_0005);
    check("estop", 64'(st_cfg[0].estop_mask), 64'h5);
    wr(8'd1, R_FREQ_INC, 32'h0100_0000);
    check("freq", 64'(st_cfg[1].freq_inc), 64'h0100_0000);
    wr(8'hFF, G_LOOP_DIV, 32'd250);
    check("loop_div", 64'(g_cfg.loop_div), 64'd250);
    wr(8'hFF, G_ACQ_EN, 32'd1);
    check("acq_en", 64'(g_cfg.acq_en), 1);
    wr(8'hFF, G_GPIO_DIR, 32'hF0);
    check("gpio_dir", 64'(g_cfg.gpio_dir), 64'hF0);
    wr(8'd9, R_KP, 32'd5);            // no such station
    wr(8'd1, 8'h40, 32'd5);           // no such register
    check("bad writes", 64'(bad), 64'd2);
    // A packet cut after its address word: the next pair must still decode.
    send({16'h0, 8'd1, R_KI}, 1);
    wr(8'd1, R_KD, 32'd77);
    check("kd after cut packet", 64'(st_cfg[1].kd), 64'd77);
    check("ki untouched", 64'(st_cfg[1].ki), 64'd0);
    // Several pairs in one packet.
    @(negedge clk); tvalid = 1; tdata = {16'h0, 8'd1, R_PWM_PERIOD};
    @(negedge clk); tdata = 32'd500;
    @(negedge clk); tdata = {16'h0, 8'd1, R_OMAX_HI};
    @(negedge clk); tdata = 32'd9; tlast = 1;
    @(negedge clk); tvalid = 0; tlast = 0;
    check("pwm period", 64'(st_cfg[1].pwm_period), 64'd500);
    check("omax hi", 64'(st_cfg[1].out_max[63:32]), 64'd9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
