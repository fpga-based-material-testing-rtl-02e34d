// dma_logger: sends the acquired and generated data of all stations to the
// CPU over the FPGA-to-CPU AXI-Stream (towards a DMA engine).
//
// Each station posts one record (log_rec_t) per control-loop point with a
// one-cycle `rec_valid`. The record is held in a per-station slot until it
// is sent. The slots are served round robin; the chosen record leaves as
// LOG_WORDS 64-bit beats (layout in mtc_pkg) with `m_tlast` on the last
// beat, one beat per cycle while `m_tready` is high. If a station posts while
// its slot is still full, the new record replaces the old one, the station's
// `dropped` count rises and the next record sent for it has flag bit 15 set:
// the CPU sees that data was lost instead of the controller stalling.
// At the default sizes 16 stations * 6 beats fill 96 of the 1000 cycles of
// a loop period. The paper says only that a DMA interface carries the
// acquired and generated data to the CPU; the record format, arbitration and
// overflow rule are this design's choices.
module dma_logger
  import mtc_pkg::*;
#(
  parameter int unsigned N_ST = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  log_rec_t        rec       [N_ST],
  input  logic [N_ST-1:0] rec_valid,
  output logic [63:0]     m_tdata,
  output logic            m_tvalid,
  output logic            m_tlast,
  input  logic            m_tready,
  output logic [15:0]     dropped   [N_ST]
);
  localparam int unsigned SW = (N_ST > 1) ? $clog2(N_ST) : 1;

  log_rec_t        slot [N_ST];
  logic [N_ST-1:0] full, lost;
  logic [SW-1:0]   rr;            // next station to look at first
  logic            sending;
  logic [2:0]      beat;
  logic [63:0]     words [LOG_WORDS];
  logic            pick_ok;
  logic [SW-1:0]   pick;
  logic            take;

  // Round-robin choice among the full slots.
  always_comb begin
    pick_ok = 1'b0;
    pick    = '0;
    for (int k = N_ST - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (32'(rr) + 32'(k)) % N_ST;
      if (full[idx]) begin
        pick_ok = 1'b1;
        pick    = SW'(idx);
      end
    end
  end

  assign take     = !sending && pick_ok;
  assign m_tvalid = sending;
  assign m_tdata  = words[beat];
  assign m_tlast  = sending && (32'(beat) == LOG_WORDS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; lost <= '0; rr <= '0; sending <= 1'b0; beat <= '0;
      for (int i = 0; i < N_ST; i++) begin
        slot[i]    <= '0;
        dropped[i] <= '0;
      end
      for (int w = 0; w < LOG_WORDS; w++) words[w] <= '0;
    end else begin
      if (take) begin
        sending  <= 1'b1;
        beat     <= '0;
        rr       <= (32'(pick) == N_ST - 1) ? '0 : pick + 1'b1;
        words[0] <= {LOG_MAGIC, 8'(pick), lost[pick], slot[pick].flags[14:0], slot[pick].seq};
        words[1] <= slot[pick].setpoint;
        words[2] <= slot[pick].pv;
        words[3] <= slot[pick].u;
        words[4] <= {slot[pick].afe, slot[pick].enc};
        words[5] <= {slot[pick].gpio, slot[pick].step_pos};
      end else if (sending && m_tready) begin
        if (m_tlast) sending <= 1'b0;
        else         beat    <= beat + 1'b1;
      end
      for (int i = 0; i < N_ST; i++) begin
        if (rec_valid[i]) begin
          slot[i] <= rec[i];
          full[i] <= 1'b1;
          if (full[i] && !(take && 32'(pick) == i)) begin
            lost[i]    <= 1'b1;
            dropped[i] <= dropped[i] + 1'b1;
          end else if (take && 32'(pick) == i) begin
            lost[i] <= 1'b0;
          end
        end else if (take && 32'(pick) == i) begin
          full[i] <= 1'b0;
          lost[i] <= 1'b0;
        end
      end
    end
  end

  a_tlast_on_last: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && m_tready && m_tlast |=> !m_tvalid || beat == '0);
endmodule
