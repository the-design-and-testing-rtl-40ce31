// tb_art_iddr: self-checking test of the DDR capture stage.
// Drives a random half-bit stream on the line, one new value after each
// clock edge, and checks that every pair holds {rising slot, falling slot}
// of the previous cycle in order.
module tb_art_iddr;
  logic clk = 1'b0, line = 1'b0;
  logic [1:0] pair;
  int checks = 0, failures = 0;
  logic [1:0] sent[$];
  logic r_bit, f_bit;

  art_iddr dut (.clk, .line, .pair);

  always #3 clk = ~clk;

  initial begin
    repeat (4) @(posedge clk);
    for (int i = 0; i < 500; i++) begin
      r_bit = 1'($urandom);
      f_bit = 1'($urandom);
      line <= r_bit;          // rising slot
      @(negedge clk);
      line <= f_bit;          // falling slot
      sent.push_back({r_bit, f_bit});
      @(posedge clk);
      #1;
      checks++;
      if (pair !== sent[0]) begin
        failures++; $display("FAIL pair %b exp %b", pair, sent[0]);
      end
      void'(sent.pop_front());
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
