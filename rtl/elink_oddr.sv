// elink_oddr: double-data-rate output of one 320 Mb/s e-link.
// pair = {first, second} is taken at a rising edge of the 160 MHz clock;
// "first" is driven from that rising edge and "second" from the following
// falling edge. Two flops on opposite edges are combined by XOR, so the
// clock is never used as data: after a rising edge line = q_p ^ q_n = first,
// after the falling edge line = second.
// Timing: one cycle from pair to line. The 320 Mb/s rate follows the paper;
// the circuit is this design's choice (the pad driver is not modelled).
module elink_oddr (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] pair,
  output logic       line
);
  logic q_p, q_n, second_hold;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_p         <= 1'b0;
      second_hold <= 1'b0;
    end else begin
      q_p         <= pair[1] ^ q_n;
      second_hold <= pair[0];
    end
  end
  always_ff @(negedge clk) begin
    if (!rst_n) q_n <= 1'b0;
    else        q_n <= second_hold ^ q_p;
  end
  assign line = q_p ^ q_n;
endmodule
