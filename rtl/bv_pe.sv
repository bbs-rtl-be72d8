// bv_pe: BitVert processing element (modified design with sub-groups).
//
// Each cycle the PE multiplies one 16-bit weight bit column with the 16
// activations it holds, bit-serially, and adds the result into a 24-bit
// output-stationary accumulator.  The 16 activations are split into two
// sub-groups of 8.  Because the scheduler inverts any sub-group column with
// more than four ones, at most four activations per sub-group are effectual;
// term k of a sub-group is picked by a 5:1 mux from activations k..k+4
// (sel_k) and gated by val_k.  The four terms are summed; for an inverted
// column (psum_sel) the sum is subtracted from the sub-group activation sum,
// which yields the sum over the original one bits (Eq. 2/3 of BBS).  The two
// sub-group results form the 12-bit psum, which is negated for the sign
// column (is_msb) and shifted left by col_idx.
//
// The BBS multiplier adds (sum of all 16 activations) x (BBS constant), i.e.
// the contribution of the pruned low columns.  It is time-multiplexed: in the
// first column cycle of a group it multiplies by the low 3 constant bits, in
// the second by the high 3 bits shifted left by 3; otherwise the scheduler
// sends a zero slice.
//
// Accumulation: out <= (shift ? out_prev : out) + (acc_en ? terms : 0).
// With shift=1 and acc_en=0 the PE loads the output of its left neighbour;
// the array uses this to shift finished outputs to the output buffer one
// column per cycle, and zeros shifted in clear the array for the next tile.
//
// Timing: one cycle from inputs to out (out is a register); reset clears out.
// Follows the paper: 5:1 term-select muxes, sub-group subtractors and psum_sel
// muxes, single shifter driven by col_idx, 3-bit time-multiplexed BBS
// multiplier, 24-bit accumulator with an out_prev mux (Fig. 7).  This design's
// own choices: signed 8-bit activations, use of out_prev as a readout shift
// chain, and a 20-bit shifted psum (the figure prints 19, which cannot hold
// -(-2048) << 7).
module bv_pe
  import bv_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  act_t      [GROUP-1:0]    act,      // activations of the current group
  input  subsum_t   [NSUB-1:0]     suma,     // per-sub-group activation sums
  input  col_ctrl_t                ctrl,     // from the scheduler of this column
  input  logic                     acc_en,   // add this cycle's terms
  input  logic                     shift,    // take out_prev instead of out
  input  acc_t                     out_prev, // output of the neighbouring PE
  output acc_t                     out
);

  logic signed [PSUMW-1:0]  psum;
  logic signed [PSUMW-1:0]  suma_all;
  logic signed [SHW-1:0]    shifted;
  logic signed [PRODW-1:0]  prod;
  acc_t                     acc_d;

  always_comb begin
    logic signed [SUBSUMW-1:0] tree;
    logic signed [SUBSUMW-1:0] sub_ps;
    logic signed [SHW-1:0]     ps_ext;
    logic signed [PRODW-1:0]   p3;
    psum     = '0;
    suma_all = '0;
    for (int s = 0; s < NSUB; s++) begin
      // step 1+2: term select and bit-serial multiplication
      tree = '0;
      for (int k = 0; k < NSEL; k++) begin
        if (ctrl.sub[s].val[k])
          tree = tree + SUBSUMW'(act[s*SUBGROUP + k + int'(ctrl.sub[s].sel[k])]);
      end
      sub_ps   = ctrl.sub[s].inv ? (suma[s] - tree) : tree;
      psum     = psum + PSUMW'(sub_ps);
      suma_all = suma_all + PSUMW'(suma[s]);
    end
    // step 3: single shift (sign column weighs -2^col_idx)
    ps_ext  = SHW'(psum);
    if (ctrl.is_msb) ps_ext = -ps_ext;
    shifted = ps_ext <<< ctrl.col_idx;
    // step 4: BBS multiplier, 3 constant bits per cycle
    p3   = PRODW'(suma_all) * $signed({1'b0, ctrl.bconst});
    prod = ctrl.bhi ? (p3 <<< CHUNKW) : p3;
    // step 5: accumulation
    acc_d = shift ? out_prev : out;
    if (acc_en) acc_d = acc_d + ACCW'(shifted) + ACCW'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= acc_d;
  end

endmodule
