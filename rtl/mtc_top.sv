// mtc_top: FPGA part of a material testing machine controller with N_ST
// independent single-channel test stations running in parallel.
//
// Structure:
//   cfg_regs     configuration from the CPU (AXI-Stream FIFO link, 32-bit
//                (address, data) word pairs) -> global and station registers
//   loop_timer   one shared control-loop tick (default 100 kHz at 100 MHz)
//   gpio_driver  general-purpose I/O, debounced inputs go to every station
//                (e-stop and limit switches) and to the result records
//   data_mux     CPU-to-FPGA stream (64-bit set points, tdest = station)
//                into one FIFO per station
//   station[i]   AFE + encoder drivers, waveform generator, PID, DAC / PWM /
//                stepper drivers, per-point test flow
//   dma_logger   result records of all stations -> FPGA-to-CPU stream
//
// The pads' tristate buffers, the ADCs, DACs, encoders and the DMA / FIFO
// engines on the CPU side are outside; their signals are ports here.
// Block set, data flow and the figures (16 stations, 100 kHz loop, 32-bit
// measurement, 64-bit profiles) follow the paper; the clock frequency and
// all interface formats are this design's choices.
module mtc_top
  import mtc_pkg::*;
#(
  parameter int unsigned N_ST       = 16,
  parameter int unsigned N_GPIO     = 32,
  parameter int unsigned LOOP_DIV   = 1000,  // 100 MHz clock / 100 kHz loop
  parameter int unsigned ROM_AW     = 10,
  parameter int unsigned ADC_BITS   = 32,
  parameter int unsigned ADC_CONV   = 64,
  parameter int unsigned DAC_BITS   = 16,
  parameter int unsigned SCLK_HALF  = 2,
  parameter int unsigned STEP_PULSE = 8,
  parameter int unsigned DEBOUNCE   = 16,
  parameter int unsigned MUX_DEPTH  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration stream from the CPU
  input  logic [31:0]       cfg_tdata,
  input  logic              cfg_tvalid,
  input  logic              cfg_tlast,
  output logic              cfg_tready,
  // CPU-to-FPGA data stream
  input  logic [63:0]       dmai_tdata,
  input  logic [7:0]        dmai_tdest,
  input  logic              dmai_tvalid,
  output logic              dmai_tready,
  // FPGA-to-CPU data stream
  output logic [63:0]       dmao_tdata,
  output logic              dmao_tvalid,
  output logic              dmao_tlast,
  input  logic              dmao_tready,
  // general-purpose I/O pads
  input  logic [N_GPIO-1:0] gpio_i,
  output logic [N_GPIO-1:0] gpio_o,
  output logic [N_GPIO-1:0] gpio_oe,
  // per-station sensor and actuator pins
  output logic [N_ST-1:0]   adc_cnv,
  output logic [N_ST-1:0]   adc_sclk,
  input  logic [N_ST-1:0]   adc_sdo,
  input  logic [N_ST-1:0]   enc_a,
  input  logic [N_ST-1:0]   enc_b,
  input  logic [N_ST-1:0]   enc_z,
  output logic [N_ST-1:0]   dac_cs_n,
  output logic [N_ST-1:0]   dac_sclk,
  output logic [N_ST-1:0]   dac_sdi,
  output logic [N_ST-1:0]   pwm,
  output logic [N_ST-1:0]   pwm_dir,
  output logic [N_ST-1:0]   step,
  output logic [N_ST-1:0]   step_dir,
  // status
  output logic [N_ST-1:0]   active,
  output logic              loop_tick,
  output logic [15:0]       cfg_bad_writes,
  output logic [15:0]       dmai_bad_dest,
  output logic [15:0]       overruns [N_ST],
  output logic [15:0]       dropped  [N_ST]
);
  station_cfg_t    st_cfg [N_ST];
  global_cfg_t     g_cfg;
  logic [N_GPIO-1:0] gpio_in;
  logic [31:0]     gpio_in32;
  logic [63:0]     st_tdata [N_ST];
  logic [N_ST-1:0] st_tvalid, st_tready, rec_valid;
  log_rec_t        rec [N_ST];

  cfg_regs #(.N_ST(N_ST), .LOOP_DIV(LOOP_DIV)) u_cfg (
    .clk, .rst_n, .s_tdata(cfg_tdata), .s_tvalid(cfg_tvalid), .s_tlast(cfg_tlast),
    .s_tready(cfg_tready), .st_cfg, .g_cfg, .bad_writes(cfg_bad_writes));

  loop_timer u_timer (
    .clk, .rst_n, .en(g_cfg.acq_en), .div(g_cfg.loop_div), .tick(loop_tick));

  gpio_driver #(.N(N_GPIO), .DEBOUNCE(DEBOUNCE)) u_gpio (
    .clk, .rst_n, .out_val(g_cfg.gpio_out[N_GPIO-1:0]), .dir(g_cfg.gpio_dir[N_GPIO-1:0]),
    .pin_i(gpio_i), .pin_o(gpio_o), .pin_oe(gpio_oe), .in_q(gpio_in));

  assign gpio_in32 = 32'(gpio_in);

  data_mux #(.N_ST(N_ST), .DEPTH(MUX_DEPTH), .DW(64)) u_mux (
    .clk, .rst_n, .s_tdata(dmai_tdata), .s_tdest(dmai_tdest), .s_tvalid(dmai_tvalid),
    .s_tready(dmai_tready), .m_tdata(st_tdata), .m_tvalid(st_tvalid), .m_tready(st_tready),
    .bad_dest(dmai_bad_dest));

  for (genvar g = 0; g < N_ST; g++) begin : g_st
    station #(
      .ROM_AW(ROM_AW), .ADC_BITS(ADC_BITS), .ADC_CONV(ADC_CONV), .DAC_BITS(DAC_BITS),
      .SCLK_HALF(SCLK_HALF), .STEP_PULSE(STEP_PULSE)
    ) u_st (
      .clk, .rst_n, .tick(loop_tick), .cfg(st_cfg[g]), .gpio_in(gpio_in32),
      .adc_cnv(adc_cnv[g]), .adc_sclk(adc_sclk[g]), .adc_sdo(adc_sdo[g]),
      .enc_a(enc_a[g]), .enc_b(enc_b[g]), .enc_z(enc_z[g]),
      .s_tdata(st_tdata[g]), .s_tvalid(st_tvalid[g]), .s_tready(st_tready[g]),
      .dac_cs_n(dac_cs_n[g]), .dac_sclk(dac_sclk[g]), .dac_sdi(dac_sdi[g]),
      .pwm(pwm[g]), .pwm_dir(pwm_dir[g]), .step(step[g]), .step_dir(step_dir[g]),
      .rec(rec[g]), .rec_valid(rec_valid[g]), .active(active[g]), .overruns(overruns[g]));
  end

  dma_logger #(.N_ST(N_ST)) u_log (
    .clk, .rst_n, .rec, .rec_valid,
    .m_tdata(dmao_tdata), .m_tvalid(dmao_tvalid), .m_tlast(dmao_tlast), .m_tready(dmao_tready),
    .dropped);
endmodule
