// encoder_driver: quadrature encoder interface for displacement measurement.
//
// The A, B and index inputs pass through two-flop synchronisers. Every edge
// of A or B moves the signed 32-bit position by one count (4x decoding);
// the direction follows the Gray sequence 00 -> 01 -> 11 -> 10 of {A,B}
// being up. A step in which both A and B change is illegal: it is counted in
// `errors` and the position is left alone. A rising index edge captures the
// position into `index_pos`. `clear` sets the position to zero.
// Position is valid three cycles after an input edge.
// The paper names encoder drivers and encoders on the actuator that measure
// displacement; the decoding scheme is this design's choice.
module encoder_driver
  import mtc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    enc_a,
  input  logic    enc_b,
  input  logic    enc_z,
  output sample_t position,
  output sample_t index_pos,
  output logic [15:0] errors
);
  logic [1:0] a_s, b_s, z_s;
  logic [1:0] ab_prev, ab_now;
  logic       z_prev;

  assign ab_now = {a_s[1], b_s[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_s <= '0; b_s <= '0; z_s <= '0;
      ab_prev <= '0; z_prev <= 1'b0;
      position <= '0; index_pos <= '0; errors <= '0;
    end else begin
      a_s     <= {a_s[0], enc_a};
      b_s     <= {b_s[0], enc_b};
      z_s     <= {z_s[0], enc_z};
      ab_prev <= ab_now;
      z_prev  <= z_s[1];
      if (z_s[1] && !z_prev) index_pos <= position;
      if (clear) begin
        position <= '0;
      end else begin
        case ({ab_prev, ab_now})
          4'b00_01, 4'b01_11, 4'b11_10, 4'b10_00: position <= position + 1;
          4'b00_10, 4'b10_11, 4'b11_01, 4'b01_00: position <= position - 1;
          4'b00_11, 4'b11_00, 4'b01_10, 4'b10_01: errors   <= errors + 1'b1;
          default: ;
        endcase
      end
    end
  end
endmodule
