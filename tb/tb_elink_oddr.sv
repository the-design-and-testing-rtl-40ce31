// tb_elink_oddr: self-checking test of the DDR output stage.
// Presents a random pair every cycle and samples the line just before each
// clock edge: the first bit must be on the line in the half cycle after the
// rising edge that took the pair, the second bit in the half cycle after the
// following falling edge.
module tb_elink_oddr;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] pair = 2'b00;
  logic line;
  int checks = 0, failures = 0;

  elink_oddr dut (.clk, .rst_n, .pair, .line);

  always #3 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 600; i++) begin
      logic [1:0] p;
      p = 2'($urandom);
      pair <= p;
      @(posedge clk);              // pair taken here
      #2 ;                         // within the rising half: first bit
      checks++;
      if (line !== p[1]) begin failures++; $display("FAIL first %0d", i); end
      @(negedge clk); #2;          // within the falling half: second bit
      checks++;
      if (line !== p[0]) begin failures++; $display("FAIL second %0d", i); end
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
