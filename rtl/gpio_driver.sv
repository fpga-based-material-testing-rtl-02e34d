// gpio_driver: general-purpose bidirectional digital channels.
//
// Each of N pins has an output value and a direction bit (1 = driven) from
// the configuration; the pad's tristate buffer sits outside, fed by `pin_o`
// and `pin_oe`. Every input is synchronised with two flops and then
// debounced: `in_q` takes a new level only after it has been stable for
// DEBOUNCE consecutive cycles, so switch bounce on e-stop buttons and limit
// switches does not reach the stations. Input latency is DEBOUNCE + 2 cycles.
// The paper names GPIO drivers for enable mechanisms and safety inputs; the
// synchroniser and debounce filter are this design's choices.
module gpio_driver #(
  parameter int unsigned N        = 32,
  parameter int unsigned DEBOUNCE = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] out_val,
  input  logic [N-1:0] dir,
  input  logic [N-1:0] pin_i,
  output logic [N-1:0] pin_o,
  output logic [N-1:0] pin_oe,
  output logic [N-1:0] in_q
);
  localparam int unsigned CW = $clog2(DEBOUNCE + 1);

  logic [N-1:0] s1, s2;
  logic [CW-1:0] cnt [N];

  assign pin_o  = out_val;
  assign pin_oe = dir;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; in_q <= '0;
      for (int i = 0; i < N; i++) cnt[i] <= '0;
    end else begin
      s1 <= pin_i;
      s2 <= s1;
      for (int i = 0; i < N; i++) begin
        if (s2[i] == in_q[i]) begin
          cnt[i] <= '0;
        end else if (32'(cnt[i]) == DEBOUNCE - 1) begin
          cnt[i]  <= '0;
          in_q[i] <= s2[i];
        end else begin
          cnt[i] <= cnt[i] + 1'b1;
        end
      end
    end
  end
endmodule
