// data_mux: routes the CPU-to-FPGA DMA stream to the stations.
//
// Each 64-bit beat carries one set point (Q32.32) for the station named by
// `s_tdest`. The beat is written into that station's FIFO of DEPTH entries;
// `s_tready` is low while the addressed FIFO is full (or tdest names no
// station, in which case the beat is dropped and counted in `bad_dest`),
// so a slow station back-pressures the DMA. The station's waveform
// generator pops one point per control-loop point in its STREAM profile.
// The paper shows a Data MUX between the CPU-to-FPGA stream and the
// waveform generation; routing by tdest and the FIFOs are this design's
// choices.
module data_mux #(
  parameter int unsigned N_ST  = 16,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned DW    = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [DW-1:0]           s_tdata,
  input  logic [7:0]              s_tdest,
  input  logic                    s_tvalid,
  output logic                    s_tready,
  output logic [DW-1:0]           m_tdata  [N_ST],
  output logic [N_ST-1:0]         m_tvalid,
  input  logic [N_ST-1:0]         m_tready,
  output logic [15:0]             bad_dest
);
  logic [N_ST-1:0] in_ready, in_valid;
  logic            dest_ok;

  assign dest_ok = (32'(s_tdest) < N_ST);

  always_comb begin
    in_valid = '0;
    s_tready = 1'b1;                // a bad destination is drained
    for (int i = 0; i < N_ST; i++) begin
      if (32'(s_tdest) == i) begin
        in_valid[i] = s_tvalid;
        s_tready    = in_ready[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          bad_dest <= '0;
    else if (s_tvalid && !dest_ok)       bad_dest <= bad_dest + 1'b1;
  end

  for (genvar g = 0; g < N_ST; g++) begin : g_fifo
    sync_fifo #(.WIDTH(DW), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_data(s_tdata), .in_valid(in_valid[g]), .in_ready(in_ready[g]),
      .out_data(m_tdata[g]), .out_valid(m_tvalid[g]), .out_ready(m_tready[g])
    );
  end
endmodule
