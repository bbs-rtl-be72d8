// bv_pe_array: the 16 x 32 output-stationary array of BitVert PEs.
//
// Row r works on input window r, column c on weight channel c.  The 16
// activations of a row and the row's sub-group sums are broadcast to all 32
// PEs of the row (input sharing); the control of column c, produced by the
// scheduler of channel c, is broadcast to all 16 PEs of the column (weight
// sharing).  Every PE keeps its own output in its accumulator.
//
// Readout: the out_prev input of each PE is the output of its left
// neighbour, column 0 takes zero.  With shift=1 (and acc_en=0) the whole
// array moves one column to the right per cycle; `out_col` is the rightmost
// column, so after a tile the output buffer receives channels 31, 30, ..., 0
// in 32 cycles, after which all accumulators hold zero.
//
// Timing: one cycle (the PE accumulator).  Array size and sharing follow the
// paper (Fig. 10); the readout chain is this design's choice.
module bv_pe_array
  import bv_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  act_t      [NROWS-1:0][GROUP-1:0]    act,
  input  subsum_t   [NROWS-1:0][NSUB-1:0]     suma,
  input  col_ctrl_t [NCOLS-1:0]               ctrl,
  input  logic                                acc_en,
  input  logic                                shift,
  output acc_t      [NROWS-1:0]               out_col
);

  acc_t pe_out [NROWS][NCOLS];

  for (genvar r = 0; r < NROWS; r++) begin : g_row
    for (genvar c = 0; c < NCOLS; c++) begin : g_col
      acc_t prev;
      if (c == 0) begin : g_edge
        assign prev = '0;
      end else begin : g_chain
        assign prev = pe_out[r][c-1];
      end
      bv_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .act      (act[r]),
        .suma     (suma[r]),
        .ctrl     (ctrl[c]),
        .acc_en   (acc_en),
        .shift    (shift),
        .out_prev (prev),
        .out      (pe_out[r][c])
      );
    end
    assign out_col[r] = pe_out[r][NCOLS-1];
  end

endmodule
