// art_deser: decoder for one ART input stream.
// An ART message, as the VMM sends it, is a flag that stays high across two
// falling edges of the 160 MHz ART clock, a low gap up to the next rising
// edge, and then the 6-bit strip address, one bit per clock edge (DDR,
// 320 Mb/s). The decoder sees the line as half-bit slots, two per cycle
// (ddr_in = {rising slot, falling slot}) and walks each slot through a small
// state machine: IDLE -> FLAG1 (one high slot) -> FLAG (two or more high
// slots) -> GAP (first low slot) -> DATA (six slots, the first one being the
// next rising slot). The message format follows the paper; the slot
// counting, taking fa0 as the address MSB, and the per-input polarity
// inversion bit (named in the paper's test list) are this design's choices.
// Timing: hit_valid pulses for one cycle, the cycle after the pair holding
// the last address bit is presented.
module art_deser
  import addc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              invert,
  input  logic [1:0]        ddr_in,
  output logic              hit_valid,
  output logic [ADDR_W-1:0] hit_addr
);
  typedef enum logic [2:0] {S_IDLE, S_FLAG1, S_FLAG, S_GAP, S_DATA} dstate_e;

  typedef struct packed {
    dstate_e           st;
    logic [2:0]        cnt;
    logic [ADDR_W-1:0] sr;
  } dctx_t;

  dctx_t ctx_q, ctx_d;
  logic  done_d;
  logic  [ADDR_W-1:0] addr_d;

  // One half-bit slot; rise_slot marks a slot launched at a rising edge.
  function automatic dctx_t step(input dctx_t c, input logic b, input logic rise_slot,
                                 output logic done);
    dctx_t n = c;
    done = 1'b0;
    unique case (c.st)
      S_IDLE:  if (b) n.st = S_FLAG1;
      S_FLAG1: n.st = b ? S_FLAG : S_IDLE;
      S_FLAG:  if (!b) n.st = S_GAP;
      S_GAP: begin
        if (rise_slot) begin
          n.st  = S_DATA;
          n.sr  = {{(ADDR_W-1){1'b0}}, b};
          n.cnt = 3'd1;
        end else if (b) begin
          n.st = S_FLAG1;  // malformed gap: treat as a new flag
        end
      end
      S_DATA: begin
        n.sr  = {c.sr[ADDR_W-2:0], b};
        n.cnt = c.cnt + 3'd1;
        if (c.cnt == 3'(ADDR_W - 1)) begin
          done = 1'b1;
          n.st = S_IDLE;
        end
      end
      default: n.st = S_IDLE;
    endcase
    return n;
  endfunction

  always_comb begin
    dctx_t mid;
    logic  d0, d1;
    logic [1:0] b;
    b      = ddr_in ^ {2{invert}};
    mid    = step(ctx_q, b[1], 1'b1, d0);
    ctx_d  = step(mid,   b[0], 1'b0, d1);
    done_d = d0 | d1;
    addr_d = d0 ? mid.sr : ctx_d.sr;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctx_q     <= '{st: S_IDLE, cnt: '0, sr: '0};
      hit_valid <= 1'b0;
      hit_addr  <= '0;
    end else begin
      ctx_q     <= ctx_d;
      hit_valid <= done_d;
      if (done_d) hit_addr <= addr_d;
    end
  end
endmodule
