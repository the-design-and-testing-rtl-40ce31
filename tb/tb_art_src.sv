// tb_art_src: behavioural source of ART messages for testbenches.
// One line per input, driven on both edges of the 160 MHz clock like a VMM:
// flag in the falling slot of one cycle and the rising slot of the next, a
// low slot, the 6 address bits MSB first, then idle. send(c, a) queues a
// message on line c that starts at the next rising edge. inv[c] inverts
// the line (polarity test).
module tb_art_src #(
  parameter int N = 32
) (
  input  logic         clk,
  input  logic [N-1:0] inv,
  output logic [N-1:0] line
);
  logic [13:0] sr  [N];
  logic [13:0] req [N];
  bit          pend[N];

  initial begin
    line = '0;
    for (int c = 0; c < N; c++) begin sr[c] = '0; pend[c] = 0; end
  end

  function automatic void send(int c, logic [5:0] a);
    req[c]  = {2'b01, 2'b10, a, 4'b0000};
    pend[c] = 1;
  endfunction

  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (pend[c]) begin sr[c] = req[c]; pend[c] = 0; end
      else sr[c] = {sr[c][11:0], 2'b00};
      line[c] <= sr[c][13] ^ inv[c];
    end
  end
  always @(negedge clk)
    for (int c = 0; c < N; c++) line[c] <= sr[c][12] ^ inv[c];
endmodule
