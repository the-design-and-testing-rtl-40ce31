// tb_elink_rx: behavioural receiver of the 14 e-links of one ART ASIC,
// standing in for the GBTx and the optical link in testbenches.
// Samples each line on both clock edges and keeps the last 8 bits per
// e-link. While align is high it looks for the cycle of the 4-cycle BC in
// which every e-link shows the byte "pattern" (the ASIC's pattern mode) and
// locks to it; from then on it delivers one 112-bit word per BC (e-link k
// in bits [8k+7:8k]) with frame_valid for one cycle.
module tb_elink_rx #(
  parameter int LANES = 14
) (
  input  logic                 clk,
  input  logic [LANES-1:0]     line,
  input  logic                 align,
  input  logic [7:0]           pattern,
  output logic                 locked,
  output logic                 frame_valid,
  output logic [LANES*8-1:0]   frame
);
  logic [LANES-1:0]      s1;
  logic [LANES-1:0][7:0] w;
  int cnt = 0, lock_ph = 0;

  initial begin locked = 0; frame_valid = 0; frame = '0; w = '0; s1 = '0; end

  always @(negedge clk) s1 <= line;

  always @(posedge clk) begin
    logic all_match;
    for (int k = 0; k < LANES; k++) w[k] = {w[k][5:0], s1[k], line[k]};
    cnt = (cnt + 1) % 4;
    all_match = 1;
    for (int k = 0; k < LANES; k++) if (w[k] != pattern) all_match = 0;
    if (align && all_match) begin locked <= 1; lock_ph = cnt; end
    frame_valid <= locked && !align && (cnt == lock_ph);
    if (locked && cnt == lock_ph) frame <= w;
  end
endmodule
