// addc_test_system: the card logic inside its test platform.
// The FPGA side of the test platform (ART generator, configuration packer,
// two ping-pong receive buffers and the latency meter) is wired to the card
// (two ART ASICs) as on the bench: the 64 generator lines reach the 64 ART
// inputs over the miniSAS cables, and the generator's BCR reaches both ART
// ASICs. The parts with no logic here close through ports: the card's two
// sets of 14 e-links go to the GBTx chips, and the words they come back as,
// after the GBTx, optical link and GBT-FPGA receiver, enter at rx_valid /
// rx_frame; the EC bits leave toward the GBT-FPGA transmitter and the
// slow-control chip. The ART ASIC configuration, which on the bench reaches
// the ASICs through the slow-control chip, is a port.
// The stop flag of the latency meter is raised by the first word on link 0
// whose hit field (all bits below the BCID) is not zero.
// The block set and wiring follow the paper's test-platform diagrams; the
// port-level interfaces are this design's choices.
module addc_test_system
  import addc_pkg::*;
#(
  parameter int unsigned GEN_DEPTH = 256,
  parameter int unsigned BUF_DEPTH = 256
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // processor side: generator table and control
  input  logic                               gen_wr_en,
  input  logic [$clog2(GEN_DEPTH)-1:0]       gen_wr_addr,
  input  logic [BCID_W+6+ADDR_W-1:0]         gen_wr_data,
  input  logic [$clog2(GEN_DEPTH):0]         gen_n_entries,
  input  logic                               gen_start,
  output logic                               gen_busy,
  output logic [BCID_W-1:0]                  gen_bcid,
  // configuration
  input  art_cfg_t [N_ASIC-1:0]              art_cfg,
  input  logic                               cfg_byte_valid,
  input  logic [7:0]                         cfg_byte_data,
  output logic                               cfg_byte_ready,
  output logic [1:0]                         ec_out,
  // card outputs toward the GBTx chips
  output logic [N_ASIC-1:0][N_ELINK-1:0]     elink_out,
  output logic [N_ASIC-1:0][BCID_W-1:0]      card_bcid,
  // words received back from the two optical links
  input  logic [N_ASIC-1:0]                  rx_valid,
  input  logic [N_ASIC-1:0][FRAME_W-1:0]     rx_frame,
  // read-out of the ping-pong buffers
  input  logic                               buf_flush,
  output logic [N_ASIC-1:0]                  rd_ready,
  input  logic [N_ASIC-1:0]                  rd_en,
  output logic [N_ASIC-1:0]                  rd_valid,
  output logic [N_ASIC-1:0][FRAME_W-1:0]     rd_data,
  output logic [N_ASIC-1:0]                  rd_last,
  output logic [N_ASIC-1:0][15:0]            overflow_cnt,
  // latency
  input  logic                               lat_arm,
  output logic [15:0]                        latency,
  output logic                               latency_done
);
  logic [N_CH-1:0] art_lines;
  logic            bcr, start_flag, stop_flag;
  logic [1:0]      fw_phase;

  art_gen #(.DEPTH(GEN_DEPTH)) u_gen (
    .clk, .rst_n,
    .wr_en(gen_wr_en), .wr_addr(gen_wr_addr), .wr_data(gen_wr_data),
    .n_entries(gen_n_entries), .start(gen_start), .busy(gen_busy),
    .bcid(gen_bcid), .bcr_out(bcr), .start_flag, .art_out(art_lines)
  );

  addc u_card (
    .clk, .rst_n,
    .bcr      ({N_ASIC{bcr}}),
    .cfg      (art_cfg),
    .art_in   (art_lines),
    .elink_out,
    .bcid     (card_bcid)
  );

  // bunch-crossing phase of the firmware side, for the EC field
  always_ff @(posedge clk) begin
    if (!rst_n) fw_phase <= 2'd0;
    else        fw_phase <= fw_phase + 2'd1;
  end

  sca_ec_packer u_cfg (
    .clk, .rst_n, .bc_last(fw_phase == 2'd3),
    .byte_valid(cfg_byte_valid), .byte_data(cfg_byte_data),
    .byte_ready(cfg_byte_ready), .ec(ec_out)
  );

  for (genvar a = 0; a < N_ASIC; a++) begin : g_rx
    pingpong_buf #(.DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid(rx_valid[a]), .in_data(rx_frame[a]), .flush(buf_flush),
      .rd_ready(rd_ready[a]), .rd_en(rd_en[a]), .rd_valid(rd_valid[a]),
      .rd_data(rd_data[a]), .rd_last(rd_last[a]), .overflow_cnt(overflow_cnt[a])
    );
  end

  assign stop_flag = rx_valid[0] && (rx_frame[0][F_BCID_LSB-1:0] != '0);

  latency_meter #(.CNT_W(16)) u_lat (
    .clk, .rst_n, .arm(lat_arm), .start_flag, .stop_flag, .latency, .done(latency_done)
  );
endmodule
