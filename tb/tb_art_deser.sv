// tb_art_deser: self-checking test of the ART decoder.
// Sends ART messages with random addresses as half-bit pairs, in both flag
// alignments (flag in falling+rising slot, or rising+falling slot followed by
// a full low cycle), with random idle gaps, with and without polarity
// inversion, plus single-slot glitches that must be ignored. Checks every
// decoded address and that hit_valid comes exactly one cycle after the pair
// holding the last address bit.
module tb_art_deser;
  import addc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, invert = 1'b0;
  logic [1:0] ddr_in = 2'b00;
  logic hit_valid;
  logic [ADDR_W-1:0] hit_addr;
  int checks = 0, failures = 0;
  int n_exp = 0, n_got = 0;
  logic [ADDR_W-1:0] exp_q[$];
  int exp_cyc[$];
  int cyc = 0;

  art_deser dut (.clk, .rst_n, .invert, .ddr_in, .hit_valid, .hit_addr);

  always #3 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && hit_valid) begin
    n_got++;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected hit %h at %0d", hit_addr, cyc);
    end else begin
      logic [ADDR_W-1:0] a; int c;
      a = exp_q.pop_front(); c = exp_cyc.pop_front();
      if (a !== hit_addr || c != cyc) begin
        failures++; $display("FAIL addr %h exp %h cyc %0d exp %0d", hit_addr, a, cyc, c);
      end
    end
  end

  task automatic put(input logic [1:0] p);
    ddr_in <= p ^ {2{invert}};
    @(posedge clk);
  endtask

  task automatic send(input logic [ADDR_W-1:0] a, input bit alt);
    if (alt) begin put(2'b11); put(2'b00); end
    else     begin put(2'b01); put(2'b10); end
    put({a[5], a[4]}); put({a[3], a[2]});
    ddr_in <= {a[1], a[0]} ^ {2{invert}};
    exp_q.push_back(a);
    exp_cyc.push_back(cyc + 2);  // taken at the next edge, seen high one edge later
    @(posedge clk);
    n_exp++;
    put(2'b00); put(2'b00);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      if (i == 150) invert = 1'b1;
      if (i % 17 == 5) begin put(2'b01); put(2'b00); put(2'b00); end  // glitch
      send(ADDR_W'($urandom), bit'($urandom_range(0, 1)));
      repeat ($urandom_range(0, 3)) put(2'b00);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_got != n_exp || exp_q.size() != 0) begin
      failures++; $display("FAIL got %0d hits, expected %0d", n_got, n_exp);
    end
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
