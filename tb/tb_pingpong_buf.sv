// tb_pingpong_buf: self-checking test of the ping-pong buffer (DEPTH 16).
// Writes a numbered word stream with random gaps while a reader with a
// random pace empties banks. Checks that words come out in order with none
// lost except while both banks are full, that every word is either read or
// counted by the overflow counter, that
// rd_last marks every 16th word of a full bank, and that flush hands over a
// partly filled bank. A slow-reader phase forces overflow.
module tb_pingpong_buf;
  localparam int W = 112, D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, flush = 1'b0, rd_en = 1'b0;
  logic [W-1:0] in_data = '0;
  logic rd_ready, rd_valid, rd_last;
  logic [W-1:0] rd_data;
  logic [15:0] overflow_cnt;
  int checks = 0, failures = 0;
  int next_exp = 0, n_written = 0, n_drop = 0, n_read = 0, n_last = 0, n_partial = 0, in_bank = 0;
  int slow = 0;

  pingpong_buf #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_data, .flush, .rd_ready,
                                        .rd_en, .rd_valid, .rd_data, .rd_last, .overflow_cnt);

  always #3 clk = ~clk;

  // reader
  always @(posedge clk) begin
    if (rd_valid) begin
      checks++;
      n_read++;
      in_bank++;
      if (rd_data[W-1:32] != '0 || rd_data[31:0] < 32'(next_exp)) begin
        failures++; $display("FAIL read %0d, expected at least %0d", rd_data[31:0], next_exp);
      end
      next_exp = int'(rd_data[31:0]) + 1;
      if (rd_last) begin
        n_last++;
        if (in_bank != D) n_partial++;
        in_bank = 0;
      end
    end
  end
  // the reader decides in the middle of the cycle, from the current rd_ready
  always @(negedge clk) rd_en <= rd_ready && ($urandom_range(0, 9) >= slow);

  initial begin
    int seq = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      slow = (t >= 1000 && t < 1600) ? 10 : 0;
      if ($urandom_range(0, 2) != 0) begin
        in_valid <= 1'b1; in_data <= W'(seq); seq++;
      end else in_valid <= 1'b0;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    @(posedge clk);
    flush <= 1'b1;
    @(posedge clk);
    flush <= 1'b0;
    repeat (200) @(posedge clk);
    checks++;
    n_drop = int'(overflow_cnt);
    if (n_drop == 0) begin
      failures++; $display("FAIL no overflow in the slow-reader phase");
    end
    checks++;
    if (n_read + n_drop != seq) begin
      failures++; $display("FAIL read %0d + dropped %0d != written %0d", n_read, n_drop, seq);
    end
    checks++;
    if (n_partial != 1) begin failures++; $display("FAIL %0d partial banks (flush)", n_partial); end
    $display("written %0d read %0d dropped %0d banks %0d", seq, n_read, n_drop, n_last);
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
