// loop_timer: control-loop rate generator. Emits a one-cycle tick every
// `div` clock cycles while enabled; all stations share it so they sample and
// update in step. With a 100 MHz clock the default divider of 1000 gives the
// 100 kHz loop rate reported for the controller (the clock frequency itself
// is this design's assumption). A divider below 2 is treated as 2.
module loop_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [31:0] div,
  output logic        tick
);
  logic [31:0] cnt;
  logic [31:0] last;

  assign last = (div < 32'd2) ? 32'd1 : div - 32'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (!en) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else begin
      tick <= (cnt == last);
      cnt  <= (cnt >= last) ? '0 : cnt + 32'd1;
    end
  end
endmodule
