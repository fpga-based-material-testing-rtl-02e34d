// sine_rom: quarter-wave sine table, one registered read per cycle.
// Entry i holds round-down of (2^31-1) * sin((i + 0.5) * pi / (2 * 2^AW)),
// computed at elaboration, so the table and its mirror images for the other
// three quadrants are exactly symmetric. Table size is this design's choice.
// Interface: `addr` is the quarter-wave index; `q` is the 31-bit magnitude
// (Q1.31 without its sign bit), valid one clock after `addr`. The paper asks
// only for accurate 64-bit profiles; using a table at all is this design's
// own choice.
module sine_rom #(
  parameter int unsigned AW = 10
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  output logic [30:0]   q
);
  function automatic logic [30:0] qsin(int unsigned i);
    real x;
    x = $sin((real'(i) + 0.5) * 3.14159265358979323846 / (2.0 * real'(1 << AW)));
    return 31'($rtoi(x * 2147483647.0));
  endfunction

  logic [30:0] rom [2**AW];
  initial for (int unsigned i = 0; i < 2**AW; i++) rom[i] = qsin(i);

  always_ff @(posedge clk) q <= rom[addr];
endmodule
