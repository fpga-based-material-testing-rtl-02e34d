// cfg_regs: configuration interface and register file.
//
// The CPU sends configuration through an AXI-Stream FIFO link as 32-bit
// words in (address, data) pairs; tlast closes a packet and re-aligns the
// pair phase, so a lost word cannot shift later writes. The address holds
// the station in bits [15:8] (0xFF = global registers) and the register in
// bits [7:0] (map in mtc_pkg). A write takes effect the cycle after its data
// word is accepted. The link is always ready (one word per cycle).
// The paper states only that configuration arrives over an AXI FIFO
// interface; the pair format, the map and the reset values are this
// design's own. Writes to unknown addresses are ignored and counted.
module cfg_regs
  import mtc_pkg::*;
#(
  parameter int unsigned N_ST     = 16,
  parameter int unsigned LOOP_DIV = 1000   // 100 MHz / 100 kHz
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  s_tdata,
  input  logic         s_tvalid,
  input  logic         s_tlast,
  output logic         s_tready,
  output station_cfg_t st_cfg [N_ST],
  output global_cfg_t  g_cfg,
  output logic [15:0]  bad_writes
);
  logic        have_addr;
  logic [15:0] addr_q;
  logic        wr;
  logic [7:0]  wst, wreg;

  assign s_tready = 1'b1;
  assign wr   = s_tvalid && have_addr;
  assign wst  = addr_q[15:8];
  assign wreg = addr_q[7:0];

  function automatic station_cfg_t st_reset();
    station_cfg_t c;
    c            = '0;
    c.out_min    = FIX64_MIN;
    c.out_max    = FIX64_MAX;
    c.pwm_period = 16'd1000;
    c.dac_en     = 1'b1;
    c.pwm_en     = 1'b1;
    return c;
  endfunction

  function automatic logic reg_known(logic [7:0] r);
    return r <= R_ESTOP_MASK;
  endfunction

  // Apply one register write to a station's configuration.
  function automatic station_cfg_t st_write(station_cfg_t c, logic [7:0] r, logic [31:0] d);
    case (r)
      R_CTRL: begin
        c.run         = d[0];
        c.closed_loop = d[1];
        c.pv_sel      = pv_sel_e'(d[2]);
        c.profile     = profile_e'(d[6:4]);
        c.dac_en      = d[8];
        c.pwm_en      = d[9];
        c.step_en     = d[10];
      end
      R_OFFSET_LO:  c.offset[31:0]     = d;
      R_OFFSET_HI:  c.offset[63:32]    = d;
      R_AMP_LO:     c.amplitude[31:0]  = d;
      R_AMP_HI:     c.amplitude[63:32] = d;
      R_ASTEP_LO:   c.amp_step[31:0]   = d;
      R_ASTEP_HI:   c.amp_step[63:32]  = d;
      R_FREQ_INC:   c.freq_inc         = d;
      R_FREQ_STEP:  c.freq_step        = d;
      R_RAMP_LO:    c.ramp_rate[31:0]  = d;
      R_RAMP_HI:    c.ramp_rate[63:32] = d;
      R_KP:         c.kp               = d;
      R_KI:         c.ki               = d;
      R_KD:         c.kd               = d;
      R_KFF:        c.kff              = d;
      R_OMIN_LO:    c.out_min[31:0]    = d;
      R_OMIN_HI:    c.out_min[63:32]   = d;
      R_OMAX_LO:    c.out_max[31:0]    = d;
      R_OMAX_HI:    c.out_max[63:32]   = d;
      R_PWM_PERIOD: c.pwm_period       = d[15:0];
      R_ESTOP_MASK: c.estop_mask       = d;
      default: ;
    endcase
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_addr <= 1'b0;
      addr_q    <= '0;
    end else if (s_tvalid) begin
      if (s_tlast)        have_addr <= 1'b0;
      else                have_addr <= !have_addr;
      if (!have_addr)     addr_q <= s_tdata[15:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ST; i++) st_cfg[i] <= st_reset();
      g_cfg          <= '0;
      g_cfg.loop_div <= LOOP_DIV;
      bad_writes     <= '0;
    end else if (wr) begin
      if (wst == STATION_GLOBAL) begin
        case (wreg)
          G_GPIO_OUT: g_cfg.gpio_out <= s_tdata;
          G_GPIO_DIR: g_cfg.gpio_dir <= s_tdata;
          G_LOOP_DIV: g_cfg.loop_div <= s_tdata;
          G_ACQ_EN:   g_cfg.acq_en   <= s_tdata[0];
          default:    bad_writes     <= bad_writes + 1'b1;
        endcase
      end else if (32'(wst) < N_ST && reg_known(wreg)) begin
        for (int i = 0; i < N_ST; i++)
          if (32'(wst) == i) st_cfg[i] <= st_write(st_cfg[i], wreg, s_tdata);
      end else begin
        bad_writes <= bad_writes + 1'b1;
      end
    end
  end
endmodule
