// bcid_counter: 12-bit bunch-crossing identifier.
// Counts bunch crossings: it advances in the last 160 MHz cycle of every BC
// (bc_last) and wraps after BCID_MAX. A bunch crossing reset (BCR) seen in
// that cycle makes the next BC number 0. The 12-bit width and the BCR input
// follow the paper; the wrap value (one LHC orbit of 3564 BCs) and sampling
// BCR only at the BC boundary are this design's choices.
// Timing: bcid changes on the edge ending a bc_last cycle.
module bcid_counter
  import addc_pkg::*;
#(
  parameter int unsigned BCID_MAX = 3563
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bc_last,
  input  logic              bcr,
  output logic [BCID_W-1:0] bcid
);
  always_ff @(posedge clk) begin
    if (!rst_n)                             bcid <= '0;
    else if (bc_last) begin
      if (bcr || bcid == BCID_W'(BCID_MAX)) bcid <= '0;
      else                                  bcid <= bcid + 1'b1;
    end
  end
endmodule
