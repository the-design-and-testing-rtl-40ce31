// tb_elink_serializer: self-checking test of the e-link serializer.
// Loads a random 112-bit word every fourth cycle and collects, per e-link,
// the two bits of each of the next four cycles. Each e-link must give back
// its byte [8k+7:8k] most significant bit first, 8 bits per BC.
module tb_elink_serializer;
  import addc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [FRAME_W-1:0] frame = '0;
  logic [N_ELINK-1:0][1:0] pairs;
  int checks = 0, failures = 0;

  elink_serializer dut (.clk, .rst_n, .load, .frame, .pairs);

  always #3 clk = ~clk;

  initial begin
    logic [FRAME_W-1:0] f;
    logic [N_ELINK-1:0][7:0] got;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 500; t++) begin
      for (int w = 0; w < FRAME_W; w += 16) f[w +: 16] = 16'($urandom);
      @(negedge clk);
      frame = f; load = 1'b1;
      @(negedge clk);          // word taken at the rising edge in between
      frame = '0; load = 1'b0;
      for (int c = 0; c < 4; c++) begin
        for (int k = 0; k < N_ELINK; k++) got[k][7 - 2*c -: 2] = pairs[k];
        if (c < 3) @(negedge clk);
      end
      for (int k = 0; k < N_ELINK; k++) begin
        checks++;
        if (got[k] !== f[8*k +: 8]) begin
          failures++; $display("FAIL t %0d link %0d got %h exp %h", t, k, got[k], f[8*k +: 8]);
        end
      end
    end
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
