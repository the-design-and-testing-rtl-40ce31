// art_hit_select: cascaded priority encoders selecting up to N_HITS hits.
// The aligned hit flags of the N_IN inputs of one bunch crossing enter a
// chain of N_HITS priority encoders. Each encoder finds the lowest-numbered
// input still flagged, reports its index as the geographical VMM address
// and its strip address, and clears that flag for the next encoder. Inputs
// configured with invert_chan report 63 - strip address. The 32-bit hit map
// and the BCID of the crossing are registered alongside.
// The cascade of priority encoders, the 8-hit limit and the 5-bit VMM
// address follow the paper; lowest-index-first priority, the input index as
// geographical address, and the meaning of "inverted channel number" are
// this design's choices.
// Timing: combinational cascade, registered when load is high (once per BC).
module art_hit_select
  import addc_pkg::*;
#(
  parameter int unsigned N_IN   = N_VMM,
  parameter int unsigned N_SEL  = N_HITS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic [N_IN-1:0]              in_valid,
  input  logic [N_IN-1:0][ADDR_W-1:0]  in_addr,
  input  logic [N_IN-1:0]              invert_chan,
  input  logic [BCID_W-1:0]            bcid_in,
  output art_hit_t [N_SEL-1:0]         hits,
  output logic [N_SEL-1:0]             hit_valid,
  output logic [N_IN-1:0]              hit_map,
  output logic [BCID_W-1:0]            bcid
);
  localparam int unsigned IDX_W = (N_IN > 1) ? $clog2(N_IN) : 1;

  art_hit_t [N_SEL-1:0] hits_d;
  logic     [N_SEL-1:0] valid_d;

  always_comb begin
    logic [N_IN-1:0] remaining;
    remaining = in_valid;
    for (int k = 0; k < N_SEL; k++) begin
      logic [IDX_W-1:0] idx;
      logic             found;
      idx   = '0;
      found = 1'b0;
      // priority encoder k: lowest set bit of what the earlier stages left
      for (int i = N_IN - 1; i >= 0; i--) begin
        if (remaining[i]) begin
          idx   = IDX_W'(i);
          found = 1'b1;
        end
      end
      valid_d[k] = found;
      hits_d[k].vmm   = found ? VMM_W'(idx) : '0;
      hits_d[k].strip = !found ? '0 :
                        invert_chan[idx] ? ~in_addr[idx] : in_addr[idx];
      if (found) remaining[idx] = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hits      <= '0;
      hit_valid <= '0;
      hit_map   <= '0;
      bcid      <= '0;
    end else if (load) begin
      hits      <= hits_d;
      hit_valid <= valid_d;
      hit_map   <= in_valid;
      bcid      <= bcid_in;
    end
  end
endmodule
