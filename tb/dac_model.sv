// dac_model: behavioural model of a serial DAC for simulation only.
// Bits are taken at rising `sclk` edges while `cs_n` is low; the rising
// edge of `cs_n` moves the received word to `code` and counts an update.
// `nbits` is the number of clocks seen in the last frame.
//
// The paper names no converter, so the protocol is this design's assumption
// and mirrors dac_driver. Simulation only.
module dac_model #(
  parameter int unsigned BITS = 16
) (
  input  logic            cs_n,
  input  logic            sclk,
  input  logic            sdi,
  output logic [BITS-1:0] code,
  output int              updates,
  output int              nbits
);
  logic [BITS-1:0] sh = '0;
  int              n  = 0;
  initial begin code = '0; updates = 0; nbits = 0; end
  always @(posedge sclk) if (!cs_n) begin sh = {sh[BITS-2:0], sdi}; n++; end
  always @(negedge cs_n) n = 0;
  always @(posedge cs_n) begin code = sh; updates++; nbits = n; end
endmodule
