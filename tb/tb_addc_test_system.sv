// tb_addc_test_system: end-to-end test of the card in its test platform,
// with every parameter of the top at its default.
// The testbench plays the host software and the parts with no logic: two
// behavioural e-link receivers stand in for the GBTx chips, optical links
// and GBT-FPGA receivers, and feed the received words back into the top.
// Sequence, following the test flow of the bench: send configuration bytes
// through the EC packer; put both ART ASICs in pattern mode and align the
// receivers; load the generator table with groups of ART entries on the 64
// channels (some groups with more than 8 hits on one ASIC); run it with the
// latency meter armed (the generator's BCR aligns the card's BCID); ASIC 0
// in hit-list mode, ASIC 1 in hit-map mode; read the ping-pong buffers out
// as the DMA would, flush the last bank; finally stop reading until the
// buffers overflow. Every word with hits is checked against a word built in
// the testbench from the table. Each mechanism is counted and must occur:
// e-link alignment, selection of 8 out of more hits, hit-map mode, BCR,
// bank hand-over, flush, overflow, latency measurement, EC bytes.
module tb_addc_test_system;
  import addc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic gen_wr_en = 1'b0, gen_start = 1'b0, gen_busy;
  logic [7:0] gen_wr_addr = '0;
  logic [23:0] gen_wr_data = '0;
  logic [8:0] gen_n_entries = '0;
  logic [BCID_W-1:0] gen_bcid;
  art_cfg_t [N_ASIC-1:0] art_cfg;
  logic cfg_byte_valid = 1'b0, cfg_byte_ready;
  logic [7:0] cfg_byte_data = '0;
  logic [1:0] ec_out;
  logic [N_ASIC-1:0][N_ELINK-1:0] elink_out;
  logic [N_ASIC-1:0][BCID_W-1:0] card_bcid;
  logic [N_ASIC-1:0] rx_valid;
  logic [N_ASIC-1:0][FRAME_W-1:0] rx_frame;
  logic buf_flush = 1'b0;
  logic [N_ASIC-1:0] rd_ready, rd_en = '0, rd_valid, rd_last;
  logic [N_ASIC-1:0][FRAME_W-1:0] rd_data;
  logic [N_ASIC-1:0][15:0] overflow_cnt;
  logic lat_arm = 1'b0, latency_done;
  logic [15:0] latency;
  logic align = 1'b0;
  logic [N_ASIC-1:0] locked;
  int checks = 0, failures = 0;

  addc_test_system dut (.*);

  for (genvar a = 0; a < N_ASIC; a++) begin : g_link
    tb_elink_rx rx (.clk, .line(elink_out[a]), .align, .pattern(8'hB4), .locked(locked[a]),
                    .frame_valid(rx_valid[a]), .frame(rx_frame[a]));
  end

  always #3 clk = ~clk;

  // ---- mechanism counters
  int n_align = 0, n_over8 = 0, n_hitmap = 0, n_bcr = 0, n_bank = 0, n_partial = 0, n_ec = 0;
  int n_lat = 0;

  // ---- DMA-like reader: collects words with hits
  bit reading = 1'b1;
  logic [FRAME_W-1:0] got [N_ASIC][$];
  int in_bank [N_ASIC];
  always @(negedge clk) for (int a = 0; a < N_ASIC; a++) rd_en[a] <= reading && rd_ready[a];
  always @(posedge clk) for (int a = 0; a < N_ASIC; a++) if (rd_valid[a]) begin
    in_bank[a]++;
    if (rd_last[a]) begin
      n_bank++;
      if (in_bank[a] != 256) n_partial++;
      in_bank[a] = 0;
    end
    if (rd_data[a][F_BCID_LSB-1:0] != '0 && rd_data[a] != {N_ELINK{8'hB4}})
      got[a].push_back(rd_data[a]);
  end
  always @(posedge clk) if (dut.bcr) n_bcr++;

  // ---- EC: rebuild bytes from the 2-bit field, once per BC
  logic [7:0] ec_sent[$];
  int ec_pairs = 0;
  logic [7:0] ec_b = '0;

  initial begin
    logic [7:0] cfg_bytes[$];
    int ent_ch[$], ent_addr[$], ent_bc[$];
    int b, idx, n_ent;
    in_bank = '{0, 0};
    for (int a = 0; a < N_ASIC; a++)
      art_cfg[a] = '{mode: MODE_PATTERN, invert_pol: '0, invert_chan: '0, deadtime: '0, pattern: 8'hB4};
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // -- configuration bytes through the EC field (an HDLC-like frame)
    cfg_bytes = '{8'h01, 8'h13, 8'hA5, 8'h3C, 8'h00};  // payload; idle flags frame it
    repeat (40) @(posedge clk);   // idle flags first, for the monitor to frame on
    foreach (cfg_bytes[i]) begin
      @(negedge clk);
      cfg_byte_valid = 1'b1; cfg_byte_data = cfg_bytes[i];
      while (!cfg_byte_ready) @(negedge clk);
      @(posedge clk);
      n_ec++;
      @(negedge clk);
      cfg_byte_valid = 1'b0;
    end

    // -- e-link phase alignment in pattern mode
    align <= 1'b1;
    repeat (40) @(posedge clk);
    align <= 1'b0;
    checks++;
    if (locked != 2'b11) begin failures++; $display("FAIL e-links not aligned"); end
    else n_align++;
    art_cfg[0].mode = MODE_HITLIST;
    art_cfg[1].mode = MODE_HITMAP;
    repeat (12) @(posedge clk);

    // -- generator table: groups 5 BCs apart
    b = 5; idx = 0;
    while (idx < 240) begin
      logic [63:0] used;
      int n;
      used = '0;
      n = (idx / 20 % 3 == 0) ? 14 : $urandom_range(1, 10);
      for (int i = 0; i < n && idx < 240; i++) begin
        int c;
        do c = (n == 14) ? $urandom_range(0, 31) : $urandom_range(0, 63); while (used[c]);
        used[c] = 1'b1;
        ent_ch.push_back(c); ent_addr.push_back($urandom_range(0, 63)); ent_bc.push_back(b);
        idx++;
      end
      b += 5;
    end
    n_ent = ent_ch.size();
    for (int i = 0; i < n_ent; i++) begin
      @(posedge clk);
      gen_wr_en <= 1'b1; gen_wr_addr <= 8'(i);
      gen_wr_data <= {12'(ent_bc[i]), 6'(ent_ch[i]), 6'(ent_addr[i])};
    end
    @(posedge clk);
    gen_wr_en <= 1'b0;
    gen_n_entries <= 9'(n_ent);
    lat_arm <= 1'b1;
    @(posedge clk);
    lat_arm <= 1'b0;
    gen_start <= 1'b1;
    @(posedge clk);
    gen_start <= 1'b0;
    wait (gen_busy);
    wait (!gen_busy);
    repeat (400 * 4) @(posedge clk);   // run on so a full bank is handed over
    buf_flush <= 1'b1;
    @(posedge clk);
    buf_flush <= 1'b0;
    repeat (300) @(posedge clk);

    // -- check the words against the table
    begin
      int off, i;
      int ng [N_ASIC];
      off = -1000;
      i = 0;
      ng = '{0, 0};
      while (i < n_ent) begin
        logic [63:0] ch;
        logic [63:0][5:0] ad;
        logic [FRAME_W-1:0] w0, w1;
        int bc, k;
        bc = ent_bc[i];
        ch = '0;
        while (i < n_ent && ent_bc[i] == bc) begin
          ch[ent_ch[i]] = 1'b1; ad[ent_ch[i]] = 6'(ent_addr[i]); i++;
        end
        if ($countones(ch[31:0]) > 8) n_over8++;
        w0 = '0; w1 = '0; k = 0;
        for (int c = 0; c < 32; c++)
          if (ch[c] && k < 8) begin w0[92 + k] = 1'b1; w0[91 - 11*k -: 11] = {5'(c), ad[c]}; k++; end
        w1[99:68] = ch[63:32];
        // card BCID = generator BCID + a fixed offset, taken from the first word
        for (int a = 0; a < N_ASIC; a++) begin
          logic [FRAME_W-1:0] e;
          e = (a == 0) ? w0 : w1;
          if (a == 0 ? ch[31:0] == '0 : ch[63:32] == '0) continue;
          checks++;
          if (got[a].size() == 0) begin failures++; $display("FAIL asic %0d: word missing", a); continue; end
          if (off == -1000) off = int'(got[a][0][111:100]) - bc;
          e[111:100] = 12'(bc + off);
          if (got[a][0] !== e) begin
            failures++; $display("FAIL asic %0d bc %0d\n got %h\n exp %h", a, bc, got[a][0], e);
          end
          if (a == 1) n_hitmap++;
          ng[a]++;
          void'(got[a].pop_front());
        end
      end
      checks++;
      if (got[0].size() != 0 || got[1].size() != 0) begin
        failures++; $display("FAIL extra words %0d %0d", got[0].size(), got[1].size());
      end
      $display("groups checked: asic0 %0d, asic1 %0d; card BCID offset %0d", ng[0], ng[1], off);
    end

    // -- latency
    checks++;
    if (!latency_done || latency < 8 || latency > 40) begin
      failures++; $display("FAIL latency %0d done %b", latency, latency_done);
    end else n_lat++;
    $display("start-to-stop latency %0d cycles = %0d ns at 160.316 MHz", latency,
             int'(real'(latency) * 6.2377));

    // -- overflow: stop reading
    reading = 1'b0;
    repeat (600 * 4) @(posedge clk);
    checks++;
    if (overflow_cnt[0] == 0 || overflow_cnt[1] == 0) begin
      failures++; $display("FAIL no overflow");
    end

    // -- EC bytes
    checks++;
    if (ec_sent.size() < cfg_bytes.size()) begin
      failures++; $display("FAIL only %0d EC bytes seen", ec_sent.size());
    end else
      foreach (cfg_bytes[i]) if (ec_sent[i] != cfg_bytes[i]) begin
        failures++; $display("FAIL EC byte %0d = %h exp %h", i, ec_sent[i], cfg_bytes[i]);
      end

    $display("mechanisms: align %0d, >8 hits %0d, hit-map words %0d, BCR cycles %0d, banks %0d, flushed %0d, overflow %0d/%0d, latency %0d, EC bytes %0d",
             n_align, n_over8, n_hitmap, n_bcr, n_bank, n_partial, overflow_cnt[0], overflow_cnt[1], n_lat, n_ec);
    if (n_align == 0) begin failures++; $display("FAIL never: alignment"); end
    if (n_over8 == 0) begin failures++; $display("FAIL never: more than 8 hits"); end
    if (n_hitmap == 0) begin failures++; $display("FAIL never: hit map"); end
    if (n_bcr == 0) begin failures++; $display("FAIL never: BCR"); end
    if (n_bank == 0) begin failures++; $display("FAIL never: bank hand-over"); end
    if (n_partial == 0) begin failures++; $display("FAIL never: flush"); end
    if (n_lat == 0) begin failures++; $display("FAIL never: latency"); end
    if (n_ec == 0) begin failures++; $display("FAIL never: EC bytes"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // EC monitor: frame on the idle flag, then collect non-idle bytes
  bit ec_locked = 0;
  always @(posedge clk) if (rst_n && dut.fw_phase == 2'd0) begin
    #1;
    ec_b = {ec_b[5:0], ec_out};
    if (!ec_locked) begin
      if (ec_b == 8'h7E) begin ec_locked = 1; ec_pairs = 0; end
    end else begin
      ec_pairs++;
      if (ec_pairs == 4) begin
        ec_pairs = 0;
        if (ec_b != 8'h7E) ec_sent.push_back(ec_b);
      end
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
