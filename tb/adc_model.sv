// adc_model: behavioural model of a serial 32-bit ADC for simulation only.
// A falling edge of `cnv` latches `value` and shows its MSB on `sdo`; every
// falling edge of `sclk` then shows the next bit (MSB first).
//
// The paper names no converter, so the serial protocol is this design's
// assumption; it mirrors what afe_driver expects. Simulation only.
module adc_model #(
  parameter int unsigned BITS = 32
) (
  input  logic            cnv,
  input  logic            sclk,
  input  logic [BITS-1:0] value,
  output logic            sdo
);
  logic [BITS-1:0] sh = '0;
  assign sdo = sh[BITS-1];
  always @(negedge cnv)  sh = value;
  always @(negedge sclk) sh = sh << 1;
endmodule
