// tb_bcid_counter: self-checking test of the BCID counter.
// Runs with a short orbit (BCID_MAX = 20) and a bc_last strobe every fourth
// cycle; sends BCR at random BCs. The expected BCID is counted in the
// testbench: +1 per BC, 0 after BCID_MAX, 0 after a BC with BCR. Also checks
// that the counter only moves at a BC boundary.
module tb_bcid_counter;
  import addc_pkg::*;
  localparam int MAXV = 20;
  logic clk = 1'b0, rst_n = 1'b0, bc_last = 1'b0, bcr = 1'b0;
  logic [BCID_W-1:0] bcid;
  int checks = 0, failures = 0, n_bcr = 0, n_wrap = 0;

  bcid_counter #(.BCID_MAX(MAXV)) dut (.clk, .rst_n, .bc_last, .bcr, .bcid);

  always #3 clk = ~clk;

  initial begin
    int exp_b = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int bc = 0; bc < 600; bc++) begin
      bit r;
      r = ($urandom_range(0, 29) == 0);
      for (int p = 0; p < 4; p++) begin
        bc_last <= (p == 3);
        bcr     <= r;
        @(posedge clk);
        #1;
        if (p < 3) begin
          checks++;
          if (bcid !== BCID_W'(exp_b)) begin failures++; $display("FAIL moved inside BC"); end
        end
      end
      if (r) begin exp_b = 0; n_bcr++; end
      else if (exp_b == MAXV) begin exp_b = 0; n_wrap++; end
      else exp_b++;
      checks++;
      if (bcid !== BCID_W'(exp_b)) begin
        failures++; $display("FAIL bc %0d bcid %0d exp %0d", bc, bcid, exp_b);
      end
    end
    checks++;
    if (n_bcr == 0 || n_wrap == 0) begin failures++; $display("FAIL no BCR or no wrap"); end
    $display("BCRs %0d, wraps %0d", n_bcr, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
