// tb_sca_ec_packer: self-checking test of the EC-field configuration packer.
// Offers random bytes with random gaps; collects the 2-bit EC field once per
// BC and rebuilds bytes (MSB first), framed on the idle flags sent first. The rebuilt stream must be the offered
// bytes in order, with 0x7E idle bytes wherever no byte was waiting.
module tb_sca_ec_packer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] ph = 2'd0;
  logic bc_last, byte_valid = 1'b0, byte_ready;
  logic [7:0] byte_data = '0;
  logic [1:0] ec;
  int checks = 0, failures = 0, n_idle = 0, n_data = 0;
  logic [7:0] sent[$];

  assign bc_last = (ph == 2'd3);
  sca_ec_packer dut (.clk, .rst_n, .bc_last, .byte_valid, .byte_data, .byte_ready, .ec);

  always #3 clk = ~clk;
  always @(posedge clk) ph <= rst_n ? ph + 2'd1 : 2'd0;

  // producer
  bit go = 0;
  // decides mid-cycle, where the handshake signals are stable
  bit taken = 0;
  always @(negedge clk) if (rst_n && go) begin
    if (taken) begin
      byte_valid = 1'b0;
      taken = 0;
    end else begin
      if (!byte_valid && $urandom_range(0, 3) == 0) begin
        byte_valid = 1'b1;
        byte_data  = 8'($urandom_range(0, 255));
        if (byte_data == 8'h7E) byte_data = 8'h11;
      end
      if (byte_valid && byte_ready) begin
        sent.push_back(byte_data);   // taken at the coming rising edge
        taken = 1;
      end
    end
  end

  initial begin
    logic [7:0] b;
    int pairs = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // sample EC in the cycle after each BC boundary (where it was updated)
    // find the byte boundary on the idle flags first
    b = '0;
    for (int bc = 0; bc < 8 && b != 8'h7E; bc++) begin
      do @(posedge clk); while (ph != 2'd0);
      #1;
      b = {b[5:0], ec};
    end
    go = 1;
    for (int bc = 0; bc < 2000; bc++) begin
      do @(posedge clk); while (ph != 2'd0);
      #1;
      b = {b[5:0], ec};
      pairs++;
      if (pairs == 4) begin
        pairs = 0;
        checks++;
        if (b == 8'h7E) n_idle++;
        else if (sent.size() == 0 || sent[0] != b) begin
          failures++; $display("FAIL byte %h, expected %h at %0d", b, sent.size() ? sent[0] : 8'h7E, bc);
        end else begin
          void'(sent.pop_front());
          n_data++;
        end
      end
    end
    checks++;
    if (n_idle == 0 || n_data < 50) begin failures++; $display("FAIL idle %0d data %0d", n_idle, n_data); end
    $display("data bytes %0d idle flags %0d", n_data, n_idle);
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
