// tb_latency_meter: self-checking test of the latency counter.
// Arms the meter, gives a start flag, then a stop flag a random number of
// cycles later (with stray stop flags before the start, which must be
// ignored) and checks the count equals that number of cycles.
module tb_latency_meter;
  logic clk = 1'b0, rst_n = 1'b0, arm = 1'b0, start_flag = 1'b0, stop_flag = 1'b0;
  logic [15:0] latency;
  logic done;
  int checks = 0, failures = 0;

  latency_meter dut (.clk, .rst_n, .arm, .start_flag, .stop_flag, .latency, .done);

  always #3 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      int n;
      n = $urandom_range(1, 300);
      arm <= 1'b1; @(posedge clk); arm <= 1'b0;
      stop_flag <= 1'b1; @(posedge clk); stop_flag <= 1'b0;   // stray, before start
      repeat ($urandom_range(0, 5)) @(posedge clk);
      start_flag <= 1'b1; @(posedge clk); start_flag <= 1'b0;
      repeat (n - 1) @(posedge clk);
      stop_flag <= 1'b1; @(posedge clk); stop_flag <= 1'b0;
      @(posedge clk); #1;
      checks++;
      if (!done || latency != 16'(n)) begin
        failures++; $display("FAIL latency %0d expected %0d done %b", latency, n, done);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
