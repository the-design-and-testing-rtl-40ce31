// art_iddr: double-data-rate capture of one ART line.
// The VMM drives a new half-bit on each edge of the 160 MHz ART clock
// (320 Mb/s). The half-bit launched at a rising edge (the "rising slot") is
// sampled on the following falling edge; the half-bit launched at a falling
// edge (the "falling slot") is sampled on the next rising edge, where both are
// presented together as pair = {rising slot, falling slot}.
// Timing: pair is valid one rising edge after the falling slot ends.
// The DDR transmission follows the paper; the two-flop capture is this
// design's choice (the SLVS receiver pad is not modelled).
module art_iddr (
  input  logic       clk,
  input  logic       line,
  output logic [1:0] pair
);
  logic s_rise;
  always_ff @(negedge clk) s_rise <= line;
  always_ff @(posedge clk) pair <= {s_rise, line};
endmodule
