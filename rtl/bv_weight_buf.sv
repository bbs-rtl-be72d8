// bv_weight_buf: on-chip weight buffer (256 KB).
//
// Holds the compressed weights as bit columns.  It has one bank per PE-array
// column (32 banks); bank c holds the 16-bit bit columns of the channel that
// array column c processes, one column per word.  Because channels of equal
// precision are stored together (channel reordering), the 32 channels of a
// block always need the same word address, so one read address serves all
// banks and a single read returns one bit column for every channel.
//
// Interface: write a row of banks with `we`, masked per bank by `wbe`; read
// with `re`/`raddr`.  Read data is registered (one cycle latency) and held
// while `re` is low, like a synchronous SRAM macro.  Capacity is the paper's
// (256 KB); bank organisation and port timing are this design's choice.
module bv_weight_buf
  import bv_pkg::*;
#(
  parameter int unsigned DEPTH = WB_DEPTH,
  parameter int unsigned NB    = COLS
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic [NB-1:0]                   wbe,
  input  logic [$clog2(DEPTH)-1:0]        waddr,
  input  logic [NB-1:0][GROUP-1:0]        wdata,
  input  logic                            re,
  input  logic [$clog2(DEPTH)-1:0]        raddr,
  output logic [NB-1:0][GROUP-1:0]        rdata
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [GROUP-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (we && wbe[b]) mem[waddr] <= wdata[b];
      if (re)           rdata[b]   <= mem[raddr];
    end
  end

endmodule
