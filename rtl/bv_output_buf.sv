// bv_output_buf: output buffer with channel unshuffling.
//
// Receives one PE-array column per cycle: the 24-bit outputs of the 16 input
// windows for one (reordered) channel.  The write address restores the
// original channel order: addr = o_base + tile * o_stride + orig_idx, where
// orig_idx comes from the channel index buffer and o_stride is the number of
// channels of the layer.  Outputs of different weight tensors that read the
// same input therefore land in the same order and can be added element-wise.
//
// With `acc` set the column is added to the word already stored (read-
// modify-write in one cycle), which lets a long reduction be split over
// several passes; this accumulate mode is this design's own addition.
//
// Interface: column write (`we`) with the address fields above, host read
// port with registered data (one cycle).  An assertion flags a write beyond
// the buffer.  Unshuffling on write-back follows the paper (Fig. 9(c)); the
// depth (2048 words of 16 x 24 bits) and word layout are this design's
// choice.
module bv_output_buf
  import bv_pkg::*;
#(
  parameter int unsigned DEPTH = OB_DEPTH,
  parameter int unsigned NR    = ROWS
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic                            acc,      // add to the stored word
  input  logic [10:0]                     o_base,
  input  logic [10:0]                     o_stride,
  input  logic [9:0]                      tile,
  input  logic [CIDXW-1:0]                orig_idx,
  input  acc_t [NR-1:0]                   wdata,
  input  logic                            re,
  input  logic [$clog2(DEPTH)-1:0]        raddr,
  output acc_t [NR-1:0]                   rdata
);

  logic [NR*ACCW-1:0] mem [DEPTH];
  logic [23:0]        waddr;

  assign waddr = 24'(o_base) + 24'(tile) * 24'(o_stride) + 24'(orig_idx);

  logic [NR*ACCW-1:0] old_word, new_word;

  always_comb begin
    old_word = mem[waddr[$clog2(DEPTH)-1:0]];
    for (int r = 0; r < NR; r++)
      new_word[r*ACCW +: ACCW] = acc ? old_word[r*ACCW +: ACCW] + wdata[r] : wdata[r];
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr[$clog2(DEPTH)-1:0]] <= new_word;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (we) assert (waddr < 24'(DEPTH))
      else $error("bv_output_buf: write address %0d beyond buffer", waddr);
  end

endmodule
