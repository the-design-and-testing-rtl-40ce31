// art_asic: hit-selection core of one ART ASIC.
// Each of the 32 ART inputs comes from one VMM front-end chip at 320 Mb/s
// (DDR on the 160 MHz ART clock). Per input, a DDR capture stage and a
// decoder recover the 6-bit strip address of each ART message. The hits are
// then aligned to the 25 ns bunch crossing (BC), a cascade of 8 priority
// encoders picks up to 8 of them and tags each with its 5-bit VMM number,
// and the result, with the 12-bit BCID, is sent as a 112-bit GBT wide-bus
// word over 14 e-links at 320 Mb/s to the GBTx serializer.
// Pipeline, in 160 MHz cycles, with the BC phase p = 0..3 from a 2-bit
// counter cleared by reset: hits decoded during a BC are released at the end
// of p = 3 (with the BCID of that BC), selected at the end of p = 0, loaded
// into the e-link shift registers at the end of p = 1, and leave the DDR
// output stage from p = 2 of the next BC on. The blocks and their order
// follow the paper; the single-clock pipeline, the phase counter (instead of
// a separate 40 MHz clock) and the configuration as a static struct (the
// I2C register file behind it is not described) are this design's choices.
// Ports: clk (160 MHz), rst_n (synchronous, active low), bcr (bunch
// crossing reset, sampled at p = 3), cfg, art_in[32], elink_out[14], bcid.
module art_asic
  import addc_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                bcr,
  input  art_cfg_t            cfg,
  input  logic [N_VMM-1:0]    art_in,
  output logic [N_ELINK-1:0]  elink_out,
  output logic [BCID_W-1:0]   bcid
);
  logic [1:0] phase;
  logic       bc_last;

  always_ff @(posedge clk) begin
    if (!rst_n) phase <= 2'd0;
    else        phase <= phase + 2'd1;
  end
  assign bc_last = (phase == 2'd3);

  // input side: DDR capture and ART decoding per input
  logic [N_VMM-1:0][1:0]        pairs_in;
  logic [N_VMM-1:0]             dec_valid;
  logic [N_VMM-1:0][ADDR_W-1:0] dec_addr;

  for (genvar i = 0; i < N_VMM; i++) begin : g_in
    art_iddr u_iddr (.clk, .line(art_in[i]), .pair(pairs_in[i]));
    art_deser u_deser (
      .clk, .rst_n,
      .invert   (cfg.invert_pol[i]),
      .ddr_in   (pairs_in[i]),
      .hit_valid(dec_valid[i]),
      .hit_addr (dec_addr[i])
    );
  end

  // bunch-crossing alignment and BCID
  logic [N_VMM-1:0]             al_valid;
  logic [N_VMM-1:0][ADDR_W-1:0] al_addr;
  logic [BCID_W-1:0]            bcid_win;

  art_bc_align u_align (
    .clk, .rst_n, .bc_last,
    .deadtime (cfg.deadtime),
    .in_valid (dec_valid), .in_addr(dec_addr),
    .out_valid(al_valid),  .out_addr(al_addr)
  );

  bcid_counter u_bcid (.clk, .rst_n, .bc_last, .bcr, .bcid);

  always_ff @(posedge clk) begin
    if (!rst_n)       bcid_win <= '0;
    else if (bc_last) bcid_win <= bcid;
  end

  // hit selection
  art_hit_t [N_HITS-1:0] sel_hits;
  logic [N_HITS-1:0]     sel_valid;
  logic [N_VMM-1:0]      sel_map;
  logic [BCID_W-1:0]     sel_bcid;

  art_hit_select u_sel (
    .clk, .rst_n,
    .load       (phase == 2'd0),
    .in_valid   (al_valid), .in_addr(al_addr),
    .invert_chan(cfg.invert_chan),
    .bcid_in    (bcid_win),
    .hits       (sel_hits), .hit_valid(sel_valid),
    .hit_map    (sel_map),  .bcid(sel_bcid)
  );

  // wide-bus word and e-links
  logic [FRAME_W-1:0]        frame;
  logic [N_ELINK-1:0][1:0]   pairs_out;

  widebus_formatter u_fmt (
    .mode(cfg.mode), .pattern(cfg.pattern), .bcid(sel_bcid),
    .hits(sel_hits), .hit_valid(sel_valid), .hit_map(sel_map), .frame
  );

  elink_serializer u_ser (.clk, .rst_n, .load(phase == 2'd1), .frame, .pairs(pairs_out));

  for (genvar k = 0; k < N_ELINK; k++) begin : g_out
    elink_oddr u_oddr (.clk, .rst_n, .pair(pairs_out[k]), .line(elink_out[k]));
  end
endmodule
