// bv_pkg: constants and types shared by the BitVert accelerator.
//
// Sizes that follow the paper: 8-bit weights and activations, a PE group of
// 16 weight/activation pairs split into two sub-groups of 8, a 16x32 PE
// array (16 input windows x 32 weight channels), a 24-bit accumulator, BBS
// metadata of 2 bits (number of redundant columns) plus a 6-bit BBS constant
// per compression group of 32 weights, and 256 KB weight and input buffers.
// Sizes that are this design's own choice: metadata, channel-index and output
// buffer depths, and the job configuration record below.
package bv_pkg;

  // ---- arithmetic widths (Fig. 7 prints 8 / 11 / 12 / 18 / 24) ----
  localparam int unsigned ABITS    = 8;   // activation precision
  localparam int unsigned WBITS    = 8;   // uncompressed weight precision
  localparam int unsigned GROUP    = 16;  // weights per PE dot product
  localparam int unsigned SUBGROUP = 8;   // sub-group size of the modified PE
  localparam int unsigned NSUB     = GROUP / SUBGROUP;
  localparam int unsigned NSEL     = SUBGROUP / 2;      // effectual terms per sub-group (BBS >= 50 %)
  localparam int unsigned WIN      = SUBGROUP - NSEL + 1; // 5:1 term-select window
  localparam int unsigned SELW     = $clog2(WIN);       // 3-bit sel
  localparam int unsigned SUBSUMW  = ABITS + $clog2(SUBGROUP); // 11-bit sub-group sum
  localparam int unsigned PSUMW    = SUBSUMW + 1;       // 12-bit psum / group sum
  localparam int unsigned COLW     = $clog2(WBITS);     // 3-bit col_idx
  localparam int unsigned CONSTW   = 6;                 // BBS constant
  localparam int unsigned CHUNKW   = 3;                 // BBS multiplier: 3 bits per cycle
  localparam int unsigned PRODW    = 18;                // BBS product
  localparam int unsigned SHW      = PSUMW + 1 + (WBITS - 1); // 20-bit shifted psum
  localparam int unsigned ACCW     = 24;                // output accumulator
  localparam int unsigned REDW     = 2;                 // #RedunCol field
  localparam int unsigned CGROUP   = 32;                // compression group size

  // ---- array ----
  localparam int unsigned ROWS     = 16;  // input windows in parallel
  localparam int unsigned COLS     = 32;  // weight channels in parallel (C_H)

  // ---- buffers ----
  localparam int unsigned WB_DEPTH = 4096; // 4096 x (32 x 16 bit) = 256 KB
  localparam int unsigned IB_DEPTH = 1024; // 1024 x (16 x 16 x 8 bit) = 256 KB
  localparam int unsigned MB_DEPTH = 1024; // 1024 x (32 x 8 bit) = 32 KB
  localparam int unsigned CB_DEPTH = 4096; // original channel index per channel
  localparam int unsigned CIDXW    = 12;
  localparam int unsigned OB_DEPTH = 2048; // 2048 x (16 x 24 bit) = 96 KB

  typedef logic signed [ABITS-1:0]   act_t;
  typedef logic signed [SUBSUMW-1:0] subsum_t;
  typedef logic signed [ACCW-1:0]    acc_t;

  // BBS compression metadata of one weight group (Sec. III-B)
  typedef struct packed {
    logic [REDW-1:0]   redun;   // number of redundant columns removed (0..3)
    logic [CONSTW-1:0] bconst;  // BBS constant (value of the pruned low columns)
  } bbs_meta_t;

  // Per-cycle control produced by the scheduler for one sub-group
  typedef struct packed {
    logic [NSEL-1:0][SELW-1:0] sel;  // position of each effectual bit in its window
    logic [NSEL-1:0]           val;  // term valid
    logic                      inv;  // psum_sel: column was inverted, subtract from sum
  } sub_ctrl_t;

  // Per-cycle control for one PE column (one weight channel)
  typedef struct packed {
    sub_ctrl_t [NSUB-1:0]  sub;
    logic [COLW-1:0]       col_idx;  // significance of the current bit column
    logic                  is_msb;   // column is the (negative) sign column
    logic [CHUNKW-1:0]     bconst;   // 3-bit slice of the BBS constant for this cycle
    logic                  bhi;      // slice is the upper one: shift product by 3
  } col_ctrl_t;

  // One job: one memory chunk of channels that share a precision (Sec. IV-C)
  typedef struct packed {
    logic [3:0]  ncol;      // stored bit columns per weight group (2..8)
    logic [9:0]  kgroups;   // 16-element groups along the reduction dimension
    logic [6:0]  nchb;      // blocks of 32 channels
    logic [9:0]  nwt;       // tiles of 16 input windows
    logic [11:0] w_base;    // weight buffer base address
    logic [9:0]  m_base;    // metadata buffer base address
    logic [9:0]  i_base;    // input buffer base address
    logic [11:0] c_base;    // channel index buffer base address
    logic [10:0] o_base;    // output buffer base address
    logic [10:0] o_stride;  // output buffer words per window tile (total channels)
    logic        acc_out;   // add to the output buffer instead of overwriting (split K)
  } bv_cfg_t;

endpackage
