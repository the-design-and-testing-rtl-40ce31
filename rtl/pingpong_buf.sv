// pingpong_buf: ping-pong buffer for the wide-bus words received from the card.
// Two banks of DEPTH words alternate: the write side fills one bank while the
// read side (the DMA toward the host) empties the other. A bank is handed
// over when it is full, or on flush if it then holds at least one word
// (a word written in the flush cycle is included). If the
// other bank has not yet been read out, the write side has nowhere to go:
// incoming words are dropped and counted in overflow_cnt until the reader
// frees a bank. The ping-pong structure follows the paper; the banks being
// on-chip arrays (instead of the external DDR memory), the hand-over rules
// and the read interface are this design's choices.
// Read side: rd_ready is high while a full bank waits; each rd_en returns
// one word in rd_data with rd_valid on the next cycle, rd_last marking the
// bank's final word. rd_en must stay low while rd_ready is low.
module pingpong_buf
  import addc_pkg::*;
#(
  parameter int unsigned W     = FRAME_W,
  parameter int unsigned DEPTH = 256
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [W-1:0]   in_data,
  input  logic           flush,
  output logic           rd_ready,
  input  logic           rd_en,
  output logic           rd_valid,
  output logic [W-1:0]   rd_data,
  output logic           rd_last,
  output logic [15:0]    overflow_cnt
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [2*DEPTH];
  logic         wb, rb;             // bank being written / read
  logic [1:0]   full;
  logic [AW:0]  wptr, rptr;
  logic [AW:0]  cnt [2];

  logic wr_ok, hand_over;
  assign wr_ok     = in_valid && !full[wb];
  assign hand_over = !full[wb] &&
                     ((wr_ok && wptr == (AW+1)'(DEPTH - 1)) || (flush && (wr_ok || wptr != '0)));
  assign rd_ready  = full[rb];

  always_ff @(posedge clk) begin
    if (wr_ok) mem[{wb, wptr[AW-1:0]}] <= in_data;
    if (rd_en) rd_data <= mem[{rb, rptr[AW-1:0]}];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wb           <= 1'b0;
      rb           <= 1'b0;
      full         <= '0;
      wptr         <= '0;
      rptr         <= '0;
      cnt          <= '{default: '0};
      rd_valid     <= 1'b0;
      rd_last      <= 1'b0;
      overflow_cnt <= '0;
    end else begin
      logic [1:0] full_n;
      full_n   = full;
      rd_valid <= rd_en;
      rd_last  <= 1'b0;
      // write side
      if (in_valid && full[wb] && overflow_cnt != '1) overflow_cnt <= overflow_cnt + 1'b1;
      if (hand_over) begin
        full_n[wb] = 1'b1;
        cnt[wb]   <= wr_ok ? wptr + 1'b1 : wptr;
        wb        <= ~wb;
        wptr      <= '0;
      end else if (wr_ok) begin
        wptr <= wptr + 1'b1;
      end
      // read side
      if (rd_en) begin
        if (rptr + 1'b1 == cnt[rb]) begin
          rd_last     <= 1'b1;
          full_n[rb]  = 1'b0;
          rb          <= ~rb;
          rptr        <= '0;
        end else begin
          rptr <= rptr + 1'b1;
        end
      end
      full <= full_n;
    end
  end
endmodule
