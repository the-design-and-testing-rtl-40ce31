// tb_addc: self-checking test of the card logic (two ART ASICs).
// A behavioural VMM source drives all 64 ART inputs; two behavioural e-link
// receivers stand in for the two GBTx chips. ASIC 0 runs in hit-list mode,
// ASIC 1 in hit-map mode. After pattern-mode alignment of both receivers,
// groups of random messages on random inputs 0..63 are sent; inputs 0..31
// must appear in ASIC 0's words (first 8, ascending input order) and inputs
// 32..63 in ASIC 1's hit map, both with the BCID counted in the testbench.
// A BCR on ASIC 1 alone must restart only that ASIC's BCID.
module tb_addc;
  import addc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_ASIC-1:0] bcr = '0;
  art_cfg_t [N_ASIC-1:0] cfg;
  logic [N_CH-1:0] art_in;
  logic [N_ASIC-1:0][N_ELINK-1:0] elink_out;
  logic [N_ASIC-1:0][BCID_W-1:0] bcid;
  logic align = 1'b0;
  logic [N_ASIC-1:0] locked, fv;
  logic [N_ASIC-1:0][FRAME_W-1:0] frame;
  int checks = 0, failures = 0, cyc = 0, n_words[N_ASIC];
  int bcr_base[N_ASIC];
  logic [FRAME_W-1:0] expq [N_ASIC][$];

  addc dut (.clk, .rst_n, .bcr, .cfg, .art_in, .elink_out, .bcid);
  tb_art_src #(.N(N_CH)) src (.clk, .inv('0), .line(art_in));
  for (genvar a = 0; a < N_ASIC; a++) begin : g_rx
    tb_elink_rx rx (.clk, .line(elink_out[a]), .align, .pattern(8'hB4), .locked(locked[a]),
                    .frame_valid(fv[a]), .frame(frame[a]));
    always @(posedge clk) if (fv[a] && frame[a][F_BCID_LSB-1:0] != '0 &&
                              frame[a] != {N_ELINK{8'hB4}}) begin
      n_words[a]++;
      checks++;
      if (expq[a].size() == 0 || frame[a] !== expq[a][0]) begin
        failures++;
        $display("FAIL asic %0d word %h exp %h", a, frame[a], expq[a].size() ? expq[a][0] : '0);
      end
      if (expq[a].size()) void'(expq[a].pop_front());
    end
  end

  always #3 clk = ~clk;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  task automatic group(input int n);
    logic [N_CH-1:0] ch;
    logic [N_CH-1:0][ADDR_W-1:0] ad;
    logic [FRAME_W-1:0] w0, w1;
    int k, bc;
    ch = '0;
    for (int i = 0; i < n; i++) ch[$urandom_range(0, N_CH - 1)] = 1'b1;
    for (int i = 0; i < N_CH; i++) ad[i] = ADDR_W'($urandom);
    while (cyc % 4 != 3) @(posedge clk);
    for (int i = 0; i < N_CH; i++) if (ch[i]) src.send(i, ad[i]);
    @(posedge clk);
    bc = cyc / 4;
    w0 = '0; w1 = '0; k = 0;
    w0[111:100] = 12'(bc + 1 - bcr_base[0]);
    w1[111:100] = 12'(bc + 1 - bcr_base[1]);
    for (int i = 0; i < N_VMM; i++)
      if (ch[i] && k < 8) begin
        w0[92 + k] = 1'b1; w0[91 - 11*k -: 11] = {5'(i), ad[i]}; k++;
      end
    w1[99:68] = ch[63:32];
    if (ch[31:0] != '0)  expq[0].push_back(w0);
    if (ch[63:32] != '0) expq[1].push_back(w1);
    repeat (11) @(posedge clk);
  endtask

  initial begin
    bcr_base = '{0, 0}; n_words = '{0, 0};
    cfg[0] = '{mode: MODE_PATTERN, invert_pol: '0, invert_chan: '0, deadtime: '0, pattern: 8'hB4};
    cfg[1] = cfg[0];
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    align <= 1'b1;
    repeat (40) @(posedge clk);
    align <= 1'b0;
    checks++;
    if (locked != 2'b11) begin failures++; $display("FAIL receivers not locked"); end
    cfg[0].mode = MODE_HITLIST;
    cfg[1].mode = MODE_HITMAP;
    repeat (12) @(posedge clk);
    for (int g = 0; g < 80; g++) group($urandom_range(1, 30));
    // BCR on ASIC 1 only
    while (cyc % 4 != 3) @(posedge clk);
    bcr[1] <= 1'b1;
    @(posedge clk);
    bcr_base[1] = cyc / 4 + 1;
    repeat (4) @(posedge clk);
    bcr[1] <= 1'b0;
    for (int g = 0; g < 40; g++) group($urandom_range(1, 30));
    repeat (40) @(posedge clk);
    checks++;
    if (expq[0].size() != 0 || expq[1].size() != 0 || n_words[0] < 50 || n_words[1] < 50) begin
      failures++; $display("FAIL words left %0d %0d", expq[0].size(), expq[1].size());
    end
    $display("words: asic0 %0d, asic1 %0d", n_words[0], n_words[1]);
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
