// tb_art_hit_select: self-checking test of the cascaded priority encoders.
// Applies random hit patterns of 0..32 hits with random addresses and
// random inversion masks. The expected hit list is built by scanning the
// inputs from 0 upward and keeping the first 8 with a hit; checks the list,
// the valid bits, the map and the BCID after each load, and that outputs
// hold while load is low.
module tb_art_hit_select;
  import addc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [N_VMM-1:0] in_valid = '0, invert_chan = '0;
  logic [N_VMM-1:0][ADDR_W-1:0] in_addr = '0;
  logic [BCID_W-1:0] bcid_in = '0, bcid;
  art_hit_t [N_HITS-1:0] hits;
  logic [N_HITS-1:0] hit_valid;
  logic [N_VMM-1:0] hit_map;
  int checks = 0, failures = 0, n_over8 = 0;

  art_hit_select dut (.clk, .rst_n, .load, .in_valid, .in_addr, .invert_chan, .bcid_in,
                      .hits, .hit_valid, .hit_map, .bcid);

  always #3 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int t = 0; t < 2000; t++) begin
      logic [N_VMM-1:0] v;
      logic [N_VMM-1:0][ADDR_W-1:0] a;
      logic [N_VMM-1:0] inv;
      int density, k;
      logic [HIT_W-1:0] exp_h [N_HITS];
      logic [N_HITS-1:0] exp_v;
      logic [BCID_W-1:0] b;
      density = $urandom_range(0, 100);
      for (int i = 0; i < N_VMM; i++) begin
        v[i] = ($urandom_range(0, 99) < density);
        a[i] = ADDR_W'($urandom);
      end
      inv = (t % 3 == 0) ? 32'($urandom) : '0;
      b = BCID_W'($urandom);
      in_valid <= v; in_addr <= a; invert_chan <= inv; bcid_in <= b; load <= 1'b1;
      @(posedge clk);
      load <= 1'b0;
      in_valid <= ~v;  // must not matter while load is low
      // reference: scan inputs in order
      k = 0; exp_v = '0;
      for (int j = 0; j < N_HITS; j++) exp_h[j] = '0;
      for (int i = 0; i < N_VMM; i++)
        if (v[i] && k < N_HITS) begin
          exp_h[k] = {5'(i), inv[i] ? 6'(63 - int'(a[i])) : a[i]};
          exp_v[k] = 1'b1;
          k++;
        end
      if ($countones(v) > N_HITS) n_over8++;
      repeat (2) @(posedge clk);
      #1;
      checks++;
      if (hit_valid !== exp_v || hit_map !== v || bcid !== b) begin
        failures++; $display("FAIL t %0d valid %b exp %b", t, hit_valid, exp_v);
      end
      for (int j = 0; j < N_HITS; j++) begin
        checks++;
        if (hits[j] !== exp_h[j]) begin
          failures++; $display("FAIL t %0d hit %0d = %h exp %h", t, j, hits[j], exp_h[j]);
        end
      end
    end
    checks++;
    if (n_over8 == 0) begin failures++; $display("FAIL never more than 8 hits"); end
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
