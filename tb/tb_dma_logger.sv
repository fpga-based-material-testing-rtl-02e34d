// tb_dma_logger: posts random records from several stations, receives the
// FPGA-to-CPU stream under random back-pressure and checks every beat of
// every record, tlast, the round-robin order when all stations are
// waiting, and the overflow rule (newest record kept, drop count, flag 15).
//
// 4 stations. A queue of posted records (with drop bookkeeping done in the
// testbench) predicts every beat. The record layout and overflow rule are
// this design's own; the paper gives only the FPGA-to-CPU DMA stream. A
// watchdog ends the run after 50000 cycles.
module tb_dma_logger;
  import mtc_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  log_rec_t rec [N];
  logic [N-1:0] rec_valid = '0;
  logic [63:0] tdata;
  logic tvalid, tlast, tready = 0;
  logic [15:0] dropped [N];
  int checks = 0, failures = 0;
  log_rec_t exp_q [N][$];
  logic exp_lost [N];
  logic [63:0] beats [$];
  int order [$];
  logic random_ready = 1;
  logic phase2 = 0;
  logic [63:0] p2_hdr [$];
  log_rec_t first_rec [N], last_rec [N];

  dma_logger #(.N_ST(N)) dut (.clk, .rst_n, .rec, .rec_valid, .m_tdata(tdata), .m_tvalid(tvalid),
    .m_tlast(tlast), .m_tready(tready), .dropped);

  always #5 clk = !clk;
  always @(negedge clk) if (random_ready) tready <= ($urandom_range(0, 3) != 0);

  function automatic log_rec_t rand_rec(int st);
    log_rec_t r;
    r.seq = $urandom; r.flags = 16'($urandom) & 16'h7FFF;
    r.setpoint = {$urandom, $urandom}; r.pv = {$urandom, $urandom}; r.u = {$urandom, $urandom};
    r.afe = $urandom; r.enc = $urandom; r.gpio = $urandom; r.step_pos = 32'(st);
    return r;
  endfunction

  // receiver: collect beats, check a record at tlast
  always @(posedge clk) if (rst_n && tvalid && tready) begin
    beats.push_back(tdata);
    checks++;
    if (tlast != (beats.size() == LOG_WORDS)) begin failures++; $display("FAIL tlast at beat %0d", beats.size()); end
    if (tlast) begin
      int st;
      log_rec_t e;
      st = int'(beats[0][55:48]);
      order.push_back(st);
      if (phase2) p2_hdr.push_back(beats[0]);
      else begin
        checks++;
        if (beats[0][63:56] != LOG_MAGIC || st >= N || exp_q[st].size() == 0) begin
          failures++; $display("FAIL bad header %h", beats[0]);
        end else begin
          e = exp_q[st].pop_front();
          checks++;
          if (beats[0][31:0] != e.seq || beats[0][46:32] != e.flags[14:0] || beats[0][47] != exp_lost[st] ||
              beats[1] != e.setpoint || beats[2] != e.pv || beats[3] != e.u ||
              beats[4] != {e.afe, e.enc} || beats[5] != {e.gpio, e.step_pos}) begin
            failures++; $display("FAIL record of station %0d", st);
          end
        end
      end
      beats.delete();
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin rec[i] = '0; exp_lost[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: sparse posts, nothing may be lost
    for (int k = 0; k < 200; k++) begin
      int st;
      st = $urandom_range(0, N - 1);
      @(negedge clk);
      if (exp_q[st].size() == 0) begin
        rec[st] = rand_rec(st); rec_valid[st] = 1; exp_q[st].push_back(rec[st]);
      end
      @(negedge clk); rec_valid = '0;
      repeat ($urandom_range(0, 12)) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (exp_q[i].size() != 0 || dropped[i] != 0) begin failures++; $display("FAIL station %0d lost data", i); end
    end
    // phase 2: stream stalled, three posts per station. One record may
    // already sit in the output register; every other station keeps only
    // its newest record, with the drop flag set.
    random_ready = 0; @(negedge clk); tready = 0;
    phase2 = 1;
    order.delete();
    for (int r = 0; r < 3; r++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        rec[i] = rand_rec(i); rec_valid[i] = 1;
        if (r == 0) first_rec[i] = rec[i];
        last_rec[i] = rec[i];
      end
      @(negedge clk); rec_valid = '0;
    end
    repeat (5) @(negedge clk);
    tready = 1;
    repeat (5 * LOG_WORDS + 20) @(negedge clk);
    checks++;
    if (p2_hdr.size() != N + 1) begin failures++; $display("FAIL %0d records after stall", p2_hdr.size()); end
    else begin
      int s0;
      s0 = int'(p2_hdr[0][55:48]);
      checks++;
      if (p2_hdr[0][31:0] != first_rec[s0].seq || p2_hdr[0][47]) begin failures++; $display("FAIL in-flight record"); end
      for (int k = 1; k <= N; k++) begin
        int st;
        st = int'(p2_hdr[k][55:48]);
        checks++;
        if (p2_hdr[k][31:0] != last_rec[st].seq || !p2_hdr[k][47]) begin failures++; $display("FAIL newest record of %0d", st); end
        checks++;
        if (dropped[st] != ((st == s0) ? 16'd1 : 16'd2)) begin failures++; $display("FAIL station %0d dropped %0d", st, dropped[st]); end
      end
      // round robin: the four records after the stall name four stations
      checks++;
      if (order[1] == order[2] || order[2] == order[3] || order[3] == order[4] ||
          order[1] == order[3] || order[1] == order[4] || order[2] == order[4]) begin
        failures++; $display("FAIL order");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
