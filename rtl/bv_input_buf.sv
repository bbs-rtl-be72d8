// bv_input_buf: on-chip input (activation) buffer (256 KB).
//
// One bank per PE-array row (16 banks).  A word of bank r holds the 16
// signed 8-bit activations of one group of input window r.  A read returns
// one group for all 16 windows at once; the PEs reuse it for all the bit
// columns of the weight group.
//
// Interface: writes go to one bank at a time (`wbank`); reads use one address
// for all banks.  Read data is registered (one cycle) and held while `re` is
// low.  Capacity is the paper's (256 KB); the organisation is this design's
// choice.
module bv_input_buf
  import bv_pkg::*;
#(
  parameter int unsigned DEPTH = IB_DEPTH,
  parameter int unsigned NB    = ROWS
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic [$clog2(NB)-1:0]           wbank,
  input  logic [$clog2(DEPTH)-1:0]        waddr,
  input  act_t [GROUP-1:0]                wdata,
  input  logic                            re,
  input  logic [$clog2(DEPTH)-1:0]        raddr,
  output act_t [NB-1:0][GROUP-1:0]        rdata
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [GROUP*ABITS-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we && wbank == ($clog2(NB))'(b)) mem[waddr] <= wdata;
      if (re)                              rdata[b]   <= mem[raddr];
    end
  end

endmodule
