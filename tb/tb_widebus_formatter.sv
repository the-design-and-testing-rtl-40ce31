// tb_widebus_formatter: self-checking test of the wide-bus word packing.
// For random inputs in each of the three modes, rebuilds the expected
// 112-bit word field by field from the documented layout: BCID in [111:100];
// hit list: valid bits in [99:92], hit k = {vmm, strip} in [91-11k -: 11];
// hit map in [99:68]; pattern mode: the byte on every e-link.
module tb_widebus_formatter;
  import addc_pkg::*;
  art_mode_e mode;
  logic [7:0] pattern;
  logic [BCID_W-1:0] bcid;
  art_hit_t [N_HITS-1:0] hits;
  logic [N_HITS-1:0] hit_valid;
  logic [N_VMM-1:0] hit_map;
  logic [FRAME_W-1:0] frame;
  int checks = 0, failures = 0;

  widebus_formatter dut (.mode, .pattern, .bcid, .hits, .hit_valid, .hit_map, .frame);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [FRAME_W-1:0] e;
      mode = art_mode_e'(t % 3);
      pattern = 8'($urandom); bcid = 12'($urandom);
      for (int k = 0; k < N_HITS; k++) hits[k] = 11'($urandom);
      hit_valid = 8'($urandom); hit_map = 32'($urandom);
      #1;
      e = '0;
      if (mode == MODE_HITLIST) begin
        for (int i = 0; i < 12; i++) e[100 + i] = bcid[i];
        for (int k = 0; k < 8; k++) begin
          e[92 + k] = hit_valid[k];
          for (int i = 0; i < 11; i++) e[81 - 11*k + i] = hits[k][i];
        end
      end else if (mode == MODE_HITMAP) begin
        for (int i = 0; i < 12; i++) e[100 + i] = bcid[i];
        for (int i = 0; i < 32; i++) e[68 + i] = hit_map[i];
      end else begin
        for (int l = 0; l < 14; l++) for (int i = 0; i < 8; i++) e[8*l + i] = pattern[i];
      end
      checks++;
      if (frame !== e) begin failures++; $display("FAIL mode %0d\n %h\n %h", mode, frame, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
