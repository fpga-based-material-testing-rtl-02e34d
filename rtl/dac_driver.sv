// dac_driver: serial DAC driver for servo-electric and servo-hydraulic
// actuators.
//
// On `load` the integer part of the control value u (Q32.32) is clamped to
// the signed DAC_BITS range and converted to offset binary (0 = most
// negative, 2^(DAC_BITS-1) = zero). The word is shifted out MSB first on
// `sdi` while `cs_n` is low: `sclk` idles low, has a period of 2*SCLK_HALF
// clocks, and the DAC takes each bit at the rising edge; `cs_n` returning
// high updates the DAC output. A transfer lasts 2*SCLK_HALF*DAC_BITS + 2
// cycles; a `load` during a transfer is ignored (the next loop point sends a
// fresh value). `code` holds the last word sent.
// The paper names a DAC driver; the converter width, the serial format and
// the offset-binary code are this design's choices.
module dac_driver
  import mtc_pkg::*;
#(
  parameter int unsigned DAC_BITS  = 16,
  parameter int unsigned SCLK_HALF = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  fix64_t              u,
  output logic                cs_n,
  output logic                sclk,
  output logic                sdi,
  output logic                busy,
  output logic [DAC_BITS-1:0] code
);
  localparam logic signed [31:0] CMAX = 32'sd2 ** (DAC_BITS - 1) - 1;
  localparam logic signed [31:0] CMIN = -(32'sd2 ** (DAC_BITS - 1));

  logic signed [31:0]  ui;
  logic [DAC_BITS-1:0] code_next, sh;
  logic [15:0]         cnt;
  logic [7:0]          nbit;

  assign ui = u[63:32];
  always_comb begin
    logic signed [31:0] c;
    if (ui > CMAX)      c = CMAX;
    else if (ui < CMIN) c = CMIN;
    else                c = ui;
    code_next = c[DAC_BITS-1:0] ^ {1'b1, {(DAC_BITS-1){1'b0}}};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_n <= 1'b1; sclk <= 1'b0; sdi <= 1'b0; busy <= 1'b0;
      code <= {1'b1, {(DAC_BITS-1){1'b0}}};
      sh <= '0; cnt <= '0; nbit <= '0;
    end else if (!busy) begin
      if (load) begin
        busy <= 1'b1;
        cs_n <= 1'b0;
        code <= code_next;
        sh   <= code_next << 1;
        sdi  <= code_next[DAC_BITS-1];
        cnt  <= 16'(SCLK_HALF - 1);
        nbit <= '0;
      end
    end else if (cs_n) begin
      busy <= 1'b0;
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;
    end else begin
      cnt  <= 16'(SCLK_HALF - 1);
      sclk <= !sclk;
      if (sclk) begin
        // falling edge: present the next bit, or end the frame
        if (32'(nbit) == DAC_BITS - 1) begin
          cs_n <= 1'b1;
        end else begin
          sdi  <= sh[DAC_BITS-1];
          sh   <= sh << 1;
        end
        nbit <= nbit + 1'b1;
      end
    end
  end
endmodule
