// tb_bv_util: reference helpers shared by the BitVert testbenches.
//
// enc_column() builds PE control for one 16-bit weight bit column without
// using the scheduler RTL: per 8-bit sub-group it inverts the column when
// more than half the bits are set, then walks the set bits in ascending
// order and gives each to the lowest free term k whose window k..k+4 holds
// it.  rand_weight() draws one weight of a compressed group and decode()
// returns its integer value:
//   w = -b[P-1]*2^(P-1) + sum_{b=S}^{P-2} bit_b*2^b + C,  P = 8-R, S = P-ncol
// where R is the number of redundant columns, ncol the stored columns and C
// the BBS constant.
package tb_bv_util;
  import bv_pkg::*;

  function automatic sub_ctrl_t enc_sub(input logic [SUBGROUP-1:0] bits, output bit ok);
    sub_ctrl_t r;
    logic [SUBGROUP-1:0] m;
    int pop, k;
    r = '0;
    pop = $countones(bits);
    r.inv = (pop > NSEL);
    m = r.inv ? ~bits : bits;
    ok = 1;
    k = 0;
    for (int p = 0; p < SUBGROUP; p++) begin
      if (m[p]) begin
        while (k < NSEL && p > k + WIN - 1) k++;
        if (k >= NSEL || p < k) begin ok = 0; break; end
        r.val[k] = 1'b1;
        r.sel[k] = SELW'(p - k);
        k++;
      end
    end
    return r;
  endfunction

  // control for bit column number j (0 = stored MSB column) of a group
  function automatic col_ctrl_t enc_column(input logic [GROUP-1:0] col, input int j,
                                           input int redun, input int bconst);
    col_ctrl_t c;
    bit ok;
    c = '0;
    for (int s = 0; s < NSUB; s++) begin
      c.sub[s] = enc_sub(col[s*SUBGROUP +: SUBGROUP], ok);
      if (!ok) $fatal(1, "tb encoder could not place a bit");
    end
    c.col_idx = COLW'(WBITS - 1 - redun - j);
    c.is_msb  = (j == 0);
    c.bhi     = (j == 1);
    c.bconst  = (j == 0) ? CHUNKW'(bconst) : (j == 1) ? CHUNKW'(bconst >> CHUNKW) : '0;
    return c;
  endfunction

  // stored columns of one weight: bit j of the result is column j (MSB first)
  function automatic logic [WBITS-1:0] rand_cols(input int ncol);
    return WBITS'($urandom_range(0, (1 << ncol) - 1));
  endfunction

  function automatic int decode(input logic [WBITS-1:0] cols, input int ncol,
                                input int redun, input int bconst);
    int p, s, v;
    p = WBITS - redun;
    s = p - ncol;
    v = bconst;
    for (int j = 0; j < ncol; j++) begin
      // column j has significance p-1-j; bit (ncol-1-j) of cols
      if (cols[ncol-1-j]) v += (j == 0) ? -(1 << (p - 1)) : (1 << (p - 1 - j));
    end
    return v;
  endfunction
endpackage
