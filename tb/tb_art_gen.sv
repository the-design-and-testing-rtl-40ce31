// tb_art_gen: self-checking test of the test-platform ART generator.
// Loads a table of random entries (groups of 1..12 entries sharing a BCID,
// groups 4..7 BCs apart), starts playback and decodes all 64 output lines
// in the testbench, sampling each line on both clock edges and looking for
// the flag/low/6-bit message shape. Checks that every entry comes out once
// on its channel with its address, that the messages of one BCID start in
// the same cycle, that group start times differ by 4 cycles per BCID step,
// that start_flag pulses once per group and that BCR is high for exactly
// the BC before BCID 0.
module tb_art_gen;
  import addc_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, start = 1'b0;
  logic [7:0] wr_addr = '0;
  logic [23:0] wr_data = '0;
  logic [8:0] n_entries = '0;
  logic busy, bcr_out, start_flag;
  logic [BCID_W-1:0] bcid;
  logic [N_CH-1:0] art_out;
  int checks = 0, failures = 0;
  int cyc = 0, n_flags = 0, n_bcr_cyc = 0;

  art_gen #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .n_entries, .start,
                                .busy, .bcid, .bcr_out, .start_flag, .art_out);

  always #3 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (start_flag) n_flags++;
  always @(posedge clk) if (bcr_out) begin
    n_bcr_cyc++;
    checks++;
    if (bcid != 12'd3563) begin failures++; $display("FAIL BCR in BC %0d", bcid); end
  end

  // decoder: 64 half-bit streams
  logic [N_CH-1:0] s_rise;
  logic [N_CH-1:0][15:0] win;
  int hold[N_CH];
  typedef struct { int ch; int addr; int cyc; } msg_t;
  msg_t got[$];
  always @(negedge clk) s_rise <= art_out;
  always @(posedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      win[c] = {win[c][13:0], s_rise[c], art_out[c]};
      // window of the last 8 cycles: 0 then flag slots 1,1 then 0, 6 bits, then 0 0 0 0
      // match on the cycle where the 6 bits are complete
      if (hold[c] > 0) hold[c]--;
      else if (win[c][11:8] == 4'b0110 && win[c][13] == 1'b0) begin
        got.push_back('{c, int'(win[c][7:2]), cyc});
        hold[c] = 4;  // skip the rest of this message
      end
    end
  end

  initial begin
    int bcids[$];
    int ent_ch[$], ent_addr[$], ent_bc[$];
    int b, n, idx;
    win = '0; s_rise = '0;
    foreach (hold[c]) hold[c] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // build table
    b = 3; idx = 0;
    while (idx < 120) begin
      logic [63:0] used;
      used = '0;
      n = $urandom_range(1, 12);
      for (int i = 0; i < n && idx < 120; i++) begin
        int c;
        do c = $urandom_range(0, 63); while (used[c]);
        used[c] = 1'b1;
        ent_ch.push_back(c); ent_addr.push_back($urandom_range(0, 63)); ent_bc.push_back(b);
        idx++;
      end
      bcids.push_back(b);
      b += $urandom_range(4, 7);
    end
    for (int i = 0; i < ent_ch.size(); i++) begin
      @(posedge clk);
      wr_en <= 1'b1; wr_addr <= 8'(i);
      wr_data <= {12'(ent_bc[i]), 6'(ent_ch[i]), 6'(ent_addr[i])};
    end
    @(posedge clk);
    wr_en <= 1'b0;
    n_entries <= 9'(ent_ch.size());
    @(posedge clk);
    // forget whatever the lines did before reset took hold
    got.delete(); n_flags = 0; n_bcr_cyc = 0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    begin
      int t0 = cyc;
      wait (busy);
      wait (!busy);
      repeat (20) @(posedge clk);
      checks++;
      n = got.size();
      if (got.size() != ent_ch.size()) begin
        failures++; $display("FAIL %0d messages for %0d entries", got.size(), ent_ch.size());
      end
      // each entry: find its message
      begin
        int ref_cyc = -1, ref_bc = 0;
        for (int i = 0; i < ent_ch.size(); i++) begin
          int f = -1;
          if (ref_cyc < 0) begin
            foreach (got[j]) if (f < 0 && got[j].ch == ent_ch[i] && got[j].addr == ent_addr[i]) f = j;
          end else begin
            foreach (got[j]) if (got[j].ch == ent_ch[i] && got[j].addr == ent_addr[i] &&
                                 got[j].cyc - ref_cyc == 4 * (ent_bc[i] - ref_bc)) f = j;
          end
          checks++;
          if (f < 0) begin failures++; $display("FAIL entry %0d not seen at its time", i); continue; end
          if (ref_cyc < 0) begin ref_cyc = got[f].cyc; ref_bc = ent_bc[i]; end
          got.delete(f);
        end
      end
    end
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL %0d extra messages", got.size()); end
    checks++;
    if (n_flags != bcids.size()) begin failures++; $display("FAIL %0d start flags, %0d groups", n_flags, bcids.size()); end
    checks++;
    if (n_bcr_cyc != 4) begin failures++; $display("FAIL BCR high %0d cycles", n_bcr_cyc); end
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
