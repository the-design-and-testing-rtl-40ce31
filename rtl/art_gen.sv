// art_gen: ART data generator of the test platform.
// Software loads a table of preset entries, each {BCID, channel 0..63,
// 6-bit strip address}, sorted by BCID. After start, the generator runs its
// own bunch-crossing counter (phase 0..3 in 160 MHz cycles, 12-bit BCID,
// wrapping after BCID_MAX; the run starts in BC BCID_MAX) and holds BCR high
// to the card during every BC BCID_MAX, so the card counts the same BCIDs. The
// table is read one entry per cycle: entries of the same BCID arm their
// channels; when the BC before that BCID ends, all armed channels start an
// ART message at once and start_flag pulses (the latency start point).
// A group of N entries needs about N/4 BCs of lead time before its BCID.
// The entry content, 64 channels and the start flag follow the paper; the
// table, read-out order and BCR handling are this design's choices.
// Ports: table write (wr_en, wr_addr, wr_data = {bcid, chan, addr}),
// n_entries, start, busy, bcid, bcr_out, start_flag, art_out[64].
module art_gen
  import addc_pkg::*;
#(
  parameter int unsigned N_OUT    = N_CH,
  parameter int unsigned DEPTH    = 256,
  parameter int unsigned BCID_MAX = 3563
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(DEPTH)-1:0]      wr_addr,
  input  logic [BCID_W+6+ADDR_W-1:0]    wr_data,
  input  logic [$clog2(DEPTH):0]        n_entries,
  input  logic                          start,
  output logic                          busy,
  output logic [BCID_W-1:0]             bcid,
  output logic                          bcr_out,
  output logic                          start_flag,
  output logic [N_OUT-1:0]              art_out
);
  localparam int unsigned PW = $clog2(DEPTH);

  typedef struct packed {
    logic [BCID_W-1:0] bcid;
    logic [5:0]        chan;
    logic [ADDR_W-1:0] addr;
  } gen_entry_t;

  gen_entry_t mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= gen_entry_t'(wr_data);

  logic [1:0]               phase;
  logic                     running;
  logic [PW:0]              rd_ptr;
  logic                     tgt_v;
  logic [BCID_W-1:0]        tgt;
  logic [N_OUT-1:0]         armed;
  logic [N_OUT-1:0][ADDR_W-1:0] armed_addr;
  logic                     bc_last;
  logic [BCID_W-1:0]        next_bcid;
  logic                     fire;
  gen_entry_t               ent;
  logic                     have_ent;

  assign bc_last   = running && (phase == 2'd3);
  assign next_bcid = (bcid == BCID_W'(BCID_MAX)) ? '0 : bcid + 1'b1;
  assign fire      = bc_last && tgt_v && (next_bcid == tgt);
  assign ent       = mem[rd_ptr[PW-1:0]];
  assign have_ent  = running && (rd_ptr < n_entries);
  assign busy      = running && (have_ent || tgt_v);
  // BCR is held for the whole BC before BCID 0, so a card whose BC phase
  // differs from the generator's still samples it once
  assign bcr_out   = running && (bcid == BCID_W'(BCID_MAX));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase      <= 2'd0;
      running    <= 1'b0;
      bcid       <= '0;
      rd_ptr     <= '0;
      tgt_v      <= 1'b0;
      tgt        <= '0;
      armed      <= '0;
      armed_addr <= '0;
      start_flag <= 1'b0;
    end else begin
      start_flag <= fire;
      if (start && !running) begin
        // the first BC of the run is BCID 0; the card sees BCR in the BC before
        running <= 1'b1;
        phase   <= 2'd0;
        bcid    <= BCID_W'(BCID_MAX);
        rd_ptr  <= '0;
        tgt_v   <= 1'b0;
        armed   <= '0;
      end else if (running) begin
        phase <= phase + 2'd1;
        if (bc_last) bcid <= next_bcid;
        if (fire) begin
          armed <= '0;
          tgt_v <= 1'b0;
        end else if (have_ent && (!tgt_v || ent.bcid == tgt)) begin
          tgt_v                 <= 1'b1;
          tgt                   <= ent.bcid;
          armed[ent.chan]       <= 1'b1;
          armed_addr[ent.chan]  <= ent.addr;
          rd_ptr                <= rd_ptr + 1'b1;
        end
      end
    end
  end

  for (genvar c = 0; c < N_OUT; c++) begin : g_ch
    logic [1:0] pair;
    art_tx_chan u_tx (.clk, .rst_n, .fire(fire && armed[c]), .addr(armed_addr[c]), .pair);
    elink_oddr  u_oddr (.clk, .rst_n, .pair, .line(art_out[c]));
  end
endmodule
