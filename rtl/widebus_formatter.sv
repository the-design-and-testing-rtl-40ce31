// widebus_formatter: builds the 112-bit GBT wide-bus word of one BC.
// Hit-list mode: BCID, 8 hit-valid bits and 8 hits of {5-bit VMM, 6-bit
// strip}. Hit-map mode: BCID and one bit per input that had a hit. Pattern
// mode: the configured byte on all 14 e-links, sent while the e-link phase
// at the GBTx is being aligned. The word content (BCID and VMM-tagged
// strip addresses), the 112-bit width and the existence of the three modes
// follow the paper; the bit layout (see addc_pkg) is this design's choice.
// Timing: purely combinational.
module widebus_formatter
  import addc_pkg::*;
(
  input  art_mode_e                mode,
  input  logic [7:0]               pattern,
  input  logic [BCID_W-1:0]        bcid,
  input  art_hit_t [N_HITS-1:0]    hits,
  input  logic [N_HITS-1:0]        hit_valid,
  input  logic [N_VMM-1:0]         hit_map,
  output logic [FRAME_W-1:0]       frame
);
  always_comb begin
    frame = '0;
    unique case (mode)
      MODE_HITLIST: begin
        frame[F_BCID_LSB +: BCID_W]  = bcid;
        frame[F_VALID_LSB +: N_HITS] = hit_valid;
        for (int k = 0; k < N_HITS; k++)
          frame[F_HIT0_MSB - HIT_W*k -: HIT_W] = hits[k];
      end
      MODE_HITMAP: begin
        frame[F_BCID_LSB +: BCID_W] = bcid;
        frame[F_MAP_LSB +: N_VMM]   = hit_map;
      end
      MODE_PATTERN: frame = {N_ELINK{pattern}};
      default: frame = '0;
    endcase
  end
endmodule
