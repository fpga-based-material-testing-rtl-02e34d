// tb_data_mux: sends random beats to random stations while the stations
// drain their FIFOs at random; checks that each station receives exactly
// its beats in order, that a full FIFO stalls the input and that beats to
// a non-existent station are dropped and counted.
//
// 4 stations with 4-deep FIFOs so that stalls happen often. A scoreboard
// queue per station holds the expected beats. The per-destination routing
// follows the paper's stream-to-station data flow; the FIFO sizes are this
// design's choice. A watchdog ends the run after 50000 cycles.
module tb_data_mux;
  localparam int unsigned N = 4, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic [63:0] s_tdata = '0;
  logic [7:0]  s_tdest = '0;
  logic s_tvalid = 0, s_tready;
  logic [63:0] m_tdata [N];
  logic [N-1:0] m_tvalid, m_tready = '0;
  logic [15:0] bad;
  int checks = 0, failures = 0, stalls = 0;
  logic [63:0] q [N][$];

  data_mux #(.N_ST(N), .DEPTH(DEPTH), .DW(64)) dut (.clk, .rst_n, .s_tdata, .s_tdest, .s_tvalid, .s_tready,
    .m_tdata, .m_tvalid, .m_tready, .bad_dest(bad));

  always #5 clk = !clk;

  // consumers
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (m_tvalid[i] && m_tready[i]) begin
        checks++;
        if (q[i].size() == 0) begin failures++; $display("FAIL station %0d: unexpected beat", i); end
        else begin
          logic [63:0] e;
          e = q[i].pop_front();
          if (m_tdata[i] !== e) begin failures++; $display("FAIL station %0d: %h expected %h", i, m_tdata[i], e); end
        end
      end
    end
  end
  always @(negedge clk) m_tready <= N'($urandom) & N'($urandom);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      s_tdata = {$urandom, $urandom};
      s_tdest = (k % 97 == 5) ? 8'd9 : 8'($urandom_range(0, N - 1));
      s_tvalid = 1;
      #1;
      while (!s_tready) begin stalls++; @(negedge clk); #1; end
      if (32'(s_tdest) < N) q[s_tdest].push_back(s_tdata);
      @(posedge clk); #1;
      s_tvalid = 0;
    end
    repeat (200) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (q[i].size() != 0) begin failures++; $display("FAIL station %0d: %0d beats lost", i, q[i].size()); end
    end
    checks++;
    if (int'(bad) != 21) begin failures++; $display("FAIL bad dest %0d", bad); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
