// tb_art_asic: end-to-end self-checking test of one ART ASIC.
// A behavioural VMM source drives the 32 ART lines and a behavioural e-link
// receiver stands in for the GBTx. The test first puts the ASIC in pattern
// mode and aligns the receiver to the byte boundary, then sends groups of
// ART messages (random inputs and addresses, all starting in the same
// cycle of a BC, one group every 3 BCs) in hit-list mode, with random
// polarity and strip-address inversion masks, then with a dead time of 4
// BCs, then in hit-map mode (words received while the polarity setting
// changes are ignored: the lines glitch then), and finally after a BCR. Every received word
// is checked against a word built in the testbench from the documented
// layout: inputs in ascending order, first 8 kept, BCID counted in the
// testbench. The latency from the first ART slot to the word is checked to
// be the same for every group and is printed.
module tb_art_asic;
  import addc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, bcr = 1'b0;
  art_cfg_t cfg;
  logic [N_VMM-1:0] art_in, src_inv;
  logic [N_ELINK-1:0] elink_out;
  logic [BCID_W-1:0] bcid;
  logic align = 1'b0, locked, fv;
  logic [FRAME_W-1:0] frame;
  int checks = 0, failures = 0;
  int cyc = 0;                       // cycles since reset release
  int bcr_base = 0;                  // BC index that the ASIC calls BCID 0

  typedef struct { int send_cyc; int bc; logic [FRAME_W-1:0] word; } exp_t;
  exp_t expq[$];
  int lat_first = -1, n_frames = 0, n_dead_drop = 0, n_over8 = 0;
  bit hitmap_seen = 0;

  art_asic dut (.clk, .rst_n, .bcr, .cfg, .art_in, .elink_out, .bcid);
  tb_art_src #(.N(N_VMM)) src (.clk, .inv(src_inv), .line(art_in));
  tb_elink_rx rx (.clk, .line(elink_out), .align, .pattern(cfg.pattern), .locked,
                  .frame_valid(fv), .frame);

  always #3 clk = ~clk;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  // compare every non-empty word with the oldest expected one
  bit ignore = 0;  // set while the configuration changes under running lines
  always @(posedge clk) if (fv && !align && !ignore) begin
    if (frame[F_BCID_LSB-1:0] != '0 && frame != {N_ELINK{8'hB4}}) begin
      n_frames++;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected word %h", frame);
      end else begin
        exp_t e;
        int lat;
        e = expq.pop_front();
        lat = cyc - e.send_cyc;
        if (lat_first < 0) begin
          lat_first = lat;
          $display("latency: first ART slot to word at receiver = %0d cycles", lat);
        end
        if (frame !== e.word || lat != lat_first) begin
          failures++;
          $display("FAIL word\n got %h\n exp %h lat %0d/%0d", frame, e.word, lat, lat_first);
        end
      end
    end
  end

  int blind_until[N_VMM];

  // send one group and queue its expected word; the BC offset between the
  // sending BC and the BC that the hits are assigned to is D_BC below
  localparam int D_BC = 1;
  task automatic group(input int n);
    logic [N_VMM-1:0] ch;
    logic [N_VMM-1:0][ADDR_W-1:0] a;
    logic [N_VMM-1:0] got;
    exp_t e;
    int k, bc;
    ch = '0;
    for (int i = 0; i < n; i++) ch[$urandom_range(0, N_VMM - 1)] = 1'b1;
    for (int i = 0; i < N_VMM; i++) a[i] = ADDR_W'($urandom);
    // wait for BC phase 0 of the ASIC (cycle count multiple of 4)
    while (cyc % 4 != 3) @(posedge clk);
    for (int i = 0; i < N_VMM; i++) if (ch[i]) src.send(i, a[i]);
    @(posedge clk);
    bc = cyc / 4;
    e.send_cyc = cyc;
    e.bc = bc;
    e.word = '0;
    got = '0;
    for (int i = 0; i < N_VMM; i++)
      if (ch[i]) begin
        if (bc <= blind_until[i]) n_dead_drop++;
        else begin got[i] = 1'b1; blind_until[i] = bc + int'(cfg.deadtime); end
      end
    if ($countones(got) > 8) n_over8++;
    e.word[111:100] = 12'(bc + D_BC - bcr_base);
    if (cfg.mode == MODE_HITMAP) begin
      e.word[99:68] = got;
      hitmap_seen = 1;
    end else begin
      k = 0;
      for (int i = 0; i < N_VMM; i++)
        if (got[i] && k < 8) begin
          e.word[92 + k] = 1'b1;
          e.word[91 - 11*k -: 11] = {5'(i), cfg.invert_chan[i] ? 6'(63 - int'(a[i])) : a[i]};
          k++;
        end
    end
    if (got != '0) expq.push_back(e);
    repeat (11) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < N_VMM; i++) blind_until[i] = -100;
    cfg = '{mode: MODE_PATTERN, invert_pol: '0, invert_chan: '0, deadtime: '0, pattern: 8'hB4};
    src_inv = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    align <= 1'b1;
    repeat (40) @(posedge clk);
    align <= 1'b0;
    checks++;
    if (!locked) begin failures++; $display("FAIL receiver did not lock in pattern mode"); end
    cfg.mode = MODE_HITLIST;
    repeat (8) @(posedge clk);
    for (int g = 0; g < 60; g++) group($urandom_range(1, 14));
    // polarity and strip-address inversion
    repeat (30) @(posedge clk);
    ignore = 1;
    cfg.invert_pol = 32'($urandom); src_inv = cfg.invert_pol;
    cfg.invert_chan = 32'($urandom);
    repeat (40) @(posedge clk);
    ignore = 0;
    for (int g = 0; g < 60; g++) group($urandom_range(1, 14));
    // dead time of 4 BCs: groups are 3 BCs apart, so repeats are dropped
    cfg.deadtime = 4'd4;
    for (int g = 0; g < 60; g++) group($urandom_range(1, 20));
    cfg.deadtime = 4'd0;
    repeat (30) @(posedge clk);
    // hit-map mode
    cfg.mode = MODE_HITMAP;
    repeat (8) @(posedge clk);
    for (int g = 0; g < 30; g++) group($urandom_range(1, 30));
    // BCR: held for a whole BC; the next BC is BCID 0
    cfg.mode = MODE_HITLIST;
    repeat (20) @(posedge clk);
    while (cyc % 4 != 3) @(posedge clk);
    bcr <= 1'b1;
    @(posedge clk);
    bcr_base = cyc / 4 + 1;
    repeat (4) @(posedge clk);
    bcr <= 1'b0;
    for (int g = 0; g < 20; g++) group($urandom_range(1, 14));
    repeat (40) @(posedge clk);
    checks++;
    if (expq.size() != 0 || n_dead_drop == 0 || n_over8 == 0 || !hitmap_seen) begin
      failures++;
      $display("FAIL left %0d expected words; dead drops %0d; >8 groups %0d",
               expq.size(), n_dead_drop, n_over8);
    end
    $display("words %0d, dead-time drops %0d, groups over 8 hits %0d", n_frames, n_dead_drop, n_over8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
