// elink_serializer: spreads the 112-bit wide-bus word over 14 e-links.
// E-link k carries word bits [8k+7:8k], most significant bit first, eight
// bits per 25 ns bunch crossing, i.e. 320 Mb/s. Per 160 MHz cycle each
// e-link presents two bits, pairs[k] = {first, second}, for a DDR output
// stage. load must be high once every four cycles; the new word is taken at
// that edge and its bits [8k+7:8k+6] appear in pairs[k] right after it.
// The 14 e-links at 320 Mb/s follow the paper; the bit mapping is this
// design's choice.
module elink_serializer
  import addc_pkg::*;
#(
  parameter int unsigned LANES = N_ELINK,
  parameter int unsigned BITS  = ELINK_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [LANES*BITS-1:0]       frame,
  output logic [LANES-1:0][1:0]       pairs
);
  logic [LANES-1:0][BITS-1:0] sr;

  always_ff @(posedge clk) begin
    if (!rst_n)    sr <= '0;
    else if (load) sr <= frame;
    else
      for (int k = 0; k < LANES; k++) sr[k] <= {sr[k][BITS-3:0], 2'b00};
  end

  always_comb
    for (int k = 0; k < LANES; k++) pairs[k] = sr[k][BITS-1 -: 2];
endmodule
