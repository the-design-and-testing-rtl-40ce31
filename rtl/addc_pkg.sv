// addc_pkg: constants and types shared by the ART data driver card logic.
// The ART ASIC takes 32 ART inputs (one per VMM front-end chip), selects up
// to 8 hits per 25 ns bunch crossing (BC), tags each with the 5-bit VMM
// number, and sends them with a 12-bit BCID as one 112-bit GBT wide-bus word
// over 14 e-links (8 bits per e-link per BC at 320 Mb/s).
// The sizes 32, 8, 5, 6, 12 and 14 follow the paper; the word layout, the
// mode encoding and the configuration fields are this design's choices.
package addc_pkg;
  localparam int unsigned N_VMM      = 32;  // ART inputs per ART ASIC
  localparam int unsigned N_HITS     = 8;   // hits selected per BC
  localparam int unsigned ADDR_W     = 6;   // ART strip address
  localparam int unsigned VMM_W      = 5;   // geographical VMM address
  localparam int unsigned HIT_W      = VMM_W + ADDR_W;
  localparam int unsigned BCID_W     = 12;
  localparam int unsigned N_ELINK    = 14;
  localparam int unsigned ELINK_BITS = 8;   // bits per e-link per BC
  localparam int unsigned FRAME_W    = N_ELINK * ELINK_BITS;  // 112
  localparam int unsigned DEAD_W     = 4;   // dead-time counter width (BCs)
  localparam int unsigned N_ASIC     = 2;   // ART ASICs per ADDC board
  localparam int unsigned N_CH       = N_ASIC * N_VMM;  // 64 ART inputs per board

  // Output modes: hit list (default), hit map, and the static pattern used
  // to align the e-link phase at the GBTx.
  typedef enum logic [1:0] {
    MODE_HITLIST = 2'd0,
    MODE_HITMAP  = 2'd1,
    MODE_PATTERN = 2'd2
  } art_mode_e;

  typedef struct packed {
    logic [VMM_W-1:0]  vmm;
    logic [ADDR_W-1:0] strip;
  } art_hit_t;

  // Static configuration of one ART ASIC (written through the slow-control chip).
  typedef struct packed {
    art_mode_e         mode;
    logic [N_VMM-1:0]  invert_pol;   // invert the ART line of this input
    logic [N_VMM-1:0]  invert_chan;  // report strip address as 63 - address
    logic [DEAD_W-1:0] deadtime;     // BCs an input stays blind after a hit
    logic [7:0]        pattern;      // byte sent on every e-link in MODE_PATTERN
  } art_cfg_t;

  // Wide-bus word layout, hit-list mode:
  //   [111:100] BCID, [99:92] hit valid (bit 92+k for hit k),
  //   [91:4] hits, hit k at [91-11k -: 11] = {vmm, strip}, [3:0] zero.
  // Hit-map mode: [111:100] BCID, [99:68] map (bit 68+i for input i), rest zero.
  localparam int unsigned F_BCID_LSB  = FRAME_W - BCID_W;        // 100
  localparam int unsigned F_VALID_LSB = F_BCID_LSB - N_HITS;     // 92
  localparam int unsigned F_HIT0_MSB  = F_VALID_LSB - 1;         // 91
  localparam int unsigned F_MAP_LSB   = F_BCID_LSB - N_VMM;      // 68
endpackage
