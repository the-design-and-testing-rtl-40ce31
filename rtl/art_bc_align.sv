// art_bc_align: phase alignment of decoded ART hits to the bunch crossing.
// Hits leave the decoders at any of the four 160 MHz cycles of a 25 ns
// bunch crossing (BC). Each input keeps the first hit of the current BC in a
// pending register; in the last cycle of the BC (bc_last) the pending hits,
// plus any hit decoded in that very cycle, move to the output registers,
// where they stay for the next four cycles. A per-input dead-time counter,
// loaded with cfg deadtime when a hit is released, blocks new hits on that
// input for that many further BCs. Phase alignment follows the paper; the
// window rule and the dead-time counter (named only in the paper's test
// list) are this design's choices.
// Timing: out_valid/out_addr change on the edge ending a bc_last cycle.
module art_bc_align
  import addc_pkg::*;
#(
  parameter int unsigned N_IN = N_VMM
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         bc_last,
  input  logic [DEAD_W-1:0]            deadtime,
  input  logic [N_IN-1:0]              in_valid,
  input  logic [N_IN-1:0][ADDR_W-1:0]  in_addr,
  output logic [N_IN-1:0]              out_valid,
  output logic [N_IN-1:0][ADDR_W-1:0]  out_addr
);
  logic [N_IN-1:0]              pend_v;
  logic [N_IN-1:0][ADDR_W-1:0]  pend_a;
  logic [N_IN-1:0][DEAD_W-1:0]  dead;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend_v    <= '0;
      pend_a    <= '0;
      dead      <= '0;
      out_valid <= '0;
      out_addr  <= '0;
    end else begin
      for (int i = 0; i < N_IN; i++) begin
        logic accept, rel_v;
        logic [ADDR_W-1:0] rel_a;
        accept = in_valid[i] && !pend_v[i] && (dead[i] == '0);
        rel_v  = pend_v[i] || accept;
        rel_a  = pend_v[i] ? pend_a[i] : in_addr[i];
        if (bc_last) begin
          out_valid[i] <= rel_v;
          out_addr[i]  <= rel_v ? rel_a : '0;
          pend_v[i]    <= 1'b0;
          if (rel_v)              dead[i] <= deadtime;
          else if (dead[i] != '0) dead[i] <= dead[i] - 1'b1;
        end else if (accept) begin
          pend_v[i] <= 1'b1;
          pend_a[i] <= in_addr[i];
        end
      end
    end
  end
endmodule
