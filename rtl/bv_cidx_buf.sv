// bv_cidx_buf: channel index buffer.
//
// Channel reordering stores weight channels of equal precision together, so
// the array computes channels in a permuted order.  This buffer keeps, for
// every stored (reordered) channel position, the channel's original index.
// During readout it is read once per output column, and the output buffer
// uses the value to write the outputs back in the original channel order.
//
// Interface: single write port, registered read (one cycle latency).  The
// function is the paper's; the depth (4096 channels, 12-bit index) is this
// design's choice.
module bv_cidx_buf
  import bv_pkg::*;
#(
  parameter int unsigned DEPTH = CB_DEPTH,
  parameter int unsigned W     = CIDXW
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic [$clog2(DEPTH)-1:0]        waddr,
  input  logic [W-1:0]                    wdata,
  input  logic                            re,
  input  logic [$clog2(DEPTH)-1:0]        raddr,
  output logic [W-1:0]                    rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata      <= mem[raddr];
  end

endmodule
