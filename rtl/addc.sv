// addc: logic of the ART data driver card.
// The card carries two mirrored paths, each an ART ASIC followed by a GBTx
// serializer; together they take the ART streams of 64 VMM chips (8 front-end
// boards of 8 VMMs) and drive 2 x 14 e-links. ART input c goes to ART ASIC
// c / 32, input c % 32. Each ART ASIC has its own BCR line and configuration.
// The GBTx chips, the slow-control chip, the optical transmitter and the
// power converter have no logic here: their signals are the ports.
// The two-path structure and the 64-input split follow the paper; driving
// both ASICs from one 160 MHz clock is this design's simplification (on the
// card each ASIC gets its clock from its own GBTx).
module addc
  import addc_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [N_ASIC-1:0]                bcr,
  input  art_cfg_t [N_ASIC-1:0]            cfg,
  input  logic [N_CH-1:0]                  art_in,
  output logic [N_ASIC-1:0][N_ELINK-1:0]   elink_out,
  output logic [N_ASIC-1:0][BCID_W-1:0]    bcid
);
  for (genvar a = 0; a < N_ASIC; a++) begin : g_asic
    art_asic u_art (
      .clk, .rst_n,
      .bcr      (bcr[a]),
      .cfg      (cfg[a]),
      .art_in   (art_in[a*N_VMM +: N_VMM]),
      .elink_out(elink_out[a]),
      .bcid     (bcid[a])
    );
  end
endmodule
