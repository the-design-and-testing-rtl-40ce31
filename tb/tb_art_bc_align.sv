// tb_art_bc_align: self-checking test of the bunch-crossing alignment.
// Each BC, random inputs get a hit at a random one of the four cycles
// (sometimes a second, later hit on the same input, which must be dropped).
// The expected output of the BC is computed from the rule "an input that
// released a hit in BC b is blind up to BC b + deadtime (the dead time
// in force at b)" with the dead time
// changed every 200 BCs. Checks the output registers once per BC, in the
// cycle after bc_last.
module tb_art_bc_align;
  import addc_pkg::*;
  localparam int N = N_VMM;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] ph = 2'd0;
  logic bc_last;
  logic [DEAD_W-1:0] deadtime = '0;
  logic [N-1:0] in_valid = '0;
  logic [N-1:0][ADDR_W-1:0] in_addr = '0;
  logic [N-1:0] out_valid;
  logic [N-1:0][ADDR_W-1:0] out_addr;
  int checks = 0, failures = 0, n_dead_drop = 0, n_dup = 0;

  assign bc_last = (ph == 2'd3);
  art_bc_align dut (.clk, .rst_n, .bc_last, .deadtime, .in_valid, .in_addr, .out_valid, .out_addr);

  always #3 clk = ~clk;

  initial begin
    int last_rel[N];
    logic [N-1:0] exp_v;
    logic [N-1:0][ADDR_W-1:0] exp_a;
    int hit_ph[N];
    logic [ADDR_W-1:0] hit_a[N];
    bit dup[N];
    foreach (last_rel[i]) last_rel[i] = -100;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    ph <= 2'd0;
    @(posedge clk);
    for (int bc = 0; bc < 1000; bc++) begin
      if (bc % 200 == 0) deadtime <= DEAD_W'(bc / 200 * 3);
      // plan this BC
      for (int i = 0; i < N; i++) begin
        hit_ph[i] = ($urandom_range(0, 99) < 35) ? $urandom_range(0, 3) : -1;
        hit_a[i]  = ADDR_W'($urandom);
        dup[i]    = (hit_ph[i] >= 0 && hit_ph[i] < 3 && $urandom_range(0, 9) == 0);
      end
      for (int p = 0; p < 4; p++) begin
        for (int i = 0; i < N; i++) begin
          in_valid[i] <= (hit_ph[i] == p) || (dup[i] && p == 3);
          in_addr[i]  <= (hit_ph[i] == p) ? hit_a[i] : ~hit_a[i];
        end
        ph <= 2'(p);
        @(posedge clk);
      end
      in_valid <= '0;
      // expected result of this BC
      for (int i = 0; i < N; i++) begin
        bit blind;
        blind = bc <= last_rel[i];
        exp_v[i] = (hit_ph[i] >= 0) && !blind;
        exp_a[i] = exp_v[i] ? hit_a[i] : '0;
        if (hit_ph[i] >= 0 && blind) n_dead_drop++;
        if (dup[i]) n_dup++;
        if (exp_v[i]) last_rel[i] = bc + int'(deadtime);  // blind up to this BC
      end
      #1;
      checks++;
      if (out_valid !== exp_v || out_addr !== exp_a) begin
        failures++;
        $display("FAIL bc %0d valid %h exp %h", bc, out_valid, exp_v);
      end
    end
    checks++;
    if (n_dead_drop == 0 || n_dup == 0) begin
      failures++; $display("FAIL dead-time or duplicate case never exercised");
    end
    $display("dead-time drops %0d, same-BC duplicates %0d", n_dead_drop, n_dup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
