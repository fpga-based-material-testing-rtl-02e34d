// afe_driver: reads one 32-bit sample from a serial ADC / analog front end
// per `start` pulse (the control-loop tick).
//
// Sequence: `cnv` is held high for CONV_CYCLES clocks to start and complete
// a conversion, then DATA_BITS bits are clocked in MSB first. `sclk` idles
// low and has a period of 2*SCLK_HALF clocks; the converter presents each bit
// after a falling edge and the driver samples `sdo` at the rising edge. The
// word is reported on `sample` (two's complement) with a one-cycle `valid`,
// CONV_CYCLES + 2*SCLK_HALF*DATA_BITS + 1 cycles after `start`; a `start`
// while `busy` is ignored.
// The paper states that the controller measures with 32-bit resolution and
// contains ADC / AFE drivers; the serial protocol and the timing are this
// design's choices, since no converter part is named.
module afe_driver
  import mtc_pkg::*;
#(
  parameter int unsigned DATA_BITS   = 32,
  parameter int unsigned SCLK_HALF   = 2,
  parameter int unsigned CONV_CYCLES = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  output logic    cnv,
  output logic    sclk,
  input  logic    sdo,
  output sample_t sample,
  output logic    valid,
  output logic    busy
);
  typedef enum logic [1:0] {A_IDLE, A_CONV, A_SHIFT} astate_e;
  astate_e st;
  logic [15:0]          cnt;
  logic [7:0]           nbit;
  logic [DATA_BITS-1:0] sh;

  assign busy = (st != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; cnt <= '0; nbit <= '0; sh <= '0;
      cnv <= 1'b0; sclk <= 1'b0; sample <= '0; valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      case (st)
        A_IDLE: if (start) begin
          st  <= A_CONV;
          cnv <= 1'b1;
          cnt <= 16'(CONV_CYCLES - 1);
        end
        A_CONV: begin
          if (cnt == 0) begin
            cnv  <= 1'b0;
            st   <= A_SHIFT;
            cnt  <= 16'(SCLK_HALF - 1);
            nbit <= '0;
          end else cnt <= cnt - 1'b1;
        end
        A_SHIFT: begin
          if (cnt == 0) begin
            cnt  <= 16'(SCLK_HALF - 1);
            sclk <= !sclk;
            if (!sclk) begin
              sh   <= {sh[DATA_BITS-2:0], sdo};
            end else begin
              nbit <= nbit + 1'b1;
              if (32'(nbit) == DATA_BITS - 1) begin
                sample <= sample_t'($signed(sh));
                valid  <= 1'b1;
                st     <= A_IDLE;
              end
            end
          end else cnt <= cnt - 1'b1;
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
