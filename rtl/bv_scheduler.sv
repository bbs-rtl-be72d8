// bv_scheduler: BitVert scheduler for one weight channel (one PE column).
//
// Every cycle it receives one 16-bit bit column of the channel's compressed
// weight group and turns it into the control the PEs of that column need:
//
//  * Bit column selection: for each sub-group of 8 bits a popcount decides
//    whether ones are in the majority (> 4).  If so the column is inverted and
//    psum_sel (here `inv`) tells the PE to subtract from the activation sum.
//    After this at most 4 bits of the sub-group are set.
//  * Activation index generation: a chain of 4 priority encoders; encoder k
//    looks at bits k..k+4, reports the position of the first one as sel_k
//    (0..4) with val_k=1, masks that bit and passes the rest on.  An encoder
//    that sees no one sets val_k=0.  An immediate assertion checks that every
//    set bit was picked up.
//  * Shift control: on the first column of a group col_idx is loaded with
//    7 - #RedunCol (the metadata field), then decremented every cycle.
//    is_msb marks the first column, whose significance is negative.
//  * BBS constant: in the first column cycle the low 3 bits of the 6-bit BBS
//    constant are sent, in the second the high 3 bits with bhi=1, afterwards
//    zero (time-multiplexed BBS multiplier, at least 2 columns per group).
//
// Interface: `en` marks a valid column, `first` the first column of a group,
// `meta` is sampled with `first`.  All outputs are registered: the control for
// a column appears one cycle after the column.  The column selection,
// priority-encoder chain and shift control follow Fig. 8 of the paper; the
// slicing of the BBS constant over two cycles and the register stage are this
// design's choices.
module bv_scheduler
  import bv_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              first,
  input  logic [GROUP-1:0]  wcol,   // bit i belongs to weight i of the group
  input  bbs_meta_t         meta,
  output col_ctrl_t         ctrl
);

  sub_ctrl_t [NSUB-1:0] sub_d;
  logic [CHUNKW-1:0]    hi_q;
  logic [1:0]           cnt_q;   // column number within the group, saturating at 2

  // bit column selection and activation index generation
  always_comb begin
    logic [SUBGROUP-1:0] bits;
    logic [SUBGROUP-1:0] mask;
    logic [$clog2(SUBGROUP+1)-1:0] pop;
    for (int s = 0; s < NSUB; s++) begin
      bits = wcol[s*SUBGROUP +: SUBGROUP];
      pop  = '0;
      for (int i = 0; i < SUBGROUP; i++) pop = pop + $bits(pop)'(bits[i]);
      sub_d[s].inv = (pop > ($bits(pop))'(NSEL));
      mask = sub_d[s].inv ? ~bits : bits;
      for (int k = 0; k < NSEL; k++) begin
        sub_d[s].val[k] = 1'b0;
        sub_d[s].sel[k] = '0;
        for (int p = WIN - 1; p >= 0; p--) begin
          if (mask[k + p]) begin
            sub_d[s].val[k] = 1'b1;
            sub_d[s].sel[k] = SELW'(p);
          end
        end
        if (sub_d[s].val[k]) mask[k + int'(sub_d[s].sel[k])] = 1'b0;
      end
      if (en) assert (mask == '0)
        else $error("bv_scheduler: effectual bit left unscheduled in sub-group %0d", s);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl  <= '0;
      hi_q  <= '0;
      cnt_q <= '0;
    end else if (en) begin
      ctrl.sub <= sub_d;
      if (first) begin
        ctrl.col_idx <= COLW'(WBITS - 1) - COLW'(meta.redun);
        ctrl.is_msb  <= 1'b1;
        ctrl.bconst  <= meta.bconst[CHUNKW-1:0];
        ctrl.bhi     <= 1'b0;
        hi_q         <= meta.bconst[CONSTW-1:CHUNKW];
        cnt_q        <= 2'd1;
      end else begin
        ctrl.col_idx <= ctrl.col_idx - 1'b1;
        ctrl.is_msb  <= 1'b0;
        ctrl.bconst  <= (cnt_q == 2'd1) ? hi_q : '0;
        ctrl.bhi     <= (cnt_q == 2'd1);
        cnt_q        <= 2'd2;
      end
    end
  end

endmodule
