// bv_meta_buf: BBS metadata buffer.
//
// Stores the 8-bit compression metadata of every weight group: 2 bits for
// the number of redundant columns and 6 bits for the BBS constant.  One
// entry covers a compression group of 32 weights, i.e. two consecutive PE
// groups of 16.  One bank per array column, so one read returns the metadata
// of all 32 channels being processed.
//
// Interface as the weight buffer: per-bank write mask, registered read held
// while `re` is low.  The metadata format is the paper's; the depth (1024
// entries per bank, enough for the weight buffer full of groups with two
// columns each) and organisation are this design's choice.
module bv_meta_buf
  import bv_pkg::*;
#(
  parameter int unsigned DEPTH = MB_DEPTH,
  parameter int unsigned NB    = COLS
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic [NB-1:0]                   wbe,
  input  logic [$clog2(DEPTH)-1:0]        waddr,
  input  bbs_meta_t [NB-1:0]              wdata,
  input  logic                            re,
  input  logic [$clog2(DEPTH)-1:0]        raddr,
  output bbs_meta_t [NB-1:0]              rdata
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [$bits(bbs_meta_t)-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we && wbe[b]) mem[waddr] <= wdata[b];
      if (re)           rdata[b]   <= mem[raddr];
    end
  end

endmodule
