// art_tx_chan: waveform of one emulated VMM ART output (test platform).
// On fire, sends one ART message as two half-bits per 160 MHz cycle,
// pair = {rising slot, falling slot}: flag high in the falling slot of the
// first cycle and the rising slot of the second, one low slot, the six
// address bits most significant first on consecutive edges, then two idle
// cycles standing in for the roughly 10 ns internal reset of the VMM after
// each message. The format follows the paper's description of the ART
// signal; the exact slot placement is this design's choice. A fire while a
// message is still being sent restarts the message.
// Timing: the first pair appears the cycle after fire; 7 cycles per message.
module art_tx_chan
  import addc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fire,
  input  logic [ADDR_W-1:0] addr,
  output logic [1:0]        pair
);
  localparam int unsigned MSG_SLOTS = 14;
  logic [MSG_SLOTS-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n)    sr <= '0;
    else if (fire) sr <= {2'b01, 2'b10, addr, 4'b0000};
    else           sr <= {sr[MSG_SLOTS-3:0], 2'b00};
  end
  assign pair = sr[MSG_SLOTS-1 -: 2];
endmodule
