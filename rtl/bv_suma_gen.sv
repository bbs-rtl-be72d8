// bv_suma_gen: group activation-sum generator.
//
// BBS replaces the sum over one bits of a weight column by "sum of all
// activations minus the sum over zero bits" whenever a column is mostly ones,
// and the pruned low columns contribute (BBS constant) x (sum of all
// activations).  Both need the sum of the activations of a group.  Since all
// 32 PEs of a row share the same input window, one generator per row serves
// the whole row.  For every row this block adds the 8 activations of each
// sub-group (11-bit signed result per sub-group); the PE adds the sub-group
// sums itself where it needs the 16-element sum.
//
// Interface: `load` samples a new group of activations; the sums are
// registered and appear one cycle later, held until the next load.  The
// function is the paper's; the adder structure and register are this
// design's choice.
module bv_suma_gen
  import bv_pkg::*;
#(
  parameter int unsigned NROWS = ROWS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 load,
  input  act_t    [NROWS-1:0][GROUP-1:0]       act,
  output subsum_t [NROWS-1:0][NSUB-1:0]        suma
);

  subsum_t [NROWS-1:0][NSUB-1:0] sum_d;

  always_comb begin
    for (int r = 0; r < NROWS; r++)
      for (int s = 0; s < NSUB; s++) begin
        sum_d[r][s] = '0;
        for (int i = 0; i < SUBGROUP; i++)
          sum_d[r][s] = sum_d[r][s] + SUBSUMW'(act[r][s*SUBGROUP + i]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    suma <= '0;
    else if (load) suma <= sum_d;
  end

endmodule
