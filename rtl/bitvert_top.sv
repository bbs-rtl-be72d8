// bitvert_top: the BitVert bit-serial DNN accelerator.
//
// BitVert computes dot products between 8-bit activations and weights that
// were compressed with bi-directional bit sparsity (BBS).  Weights are
// processed one bit column at a time; in each 8-bit sub-group column either
// the ones or the zeros are skipped, whichever are more, so at most half of
// the bits cost work and every PE column runs at the same speed.  Pruned low
// columns of a weight group are replaced by one 6-bit BBS constant per 32
// weights, and redundant sign columns are dropped, so a group of ncol stored
// columns takes exactly ncol cycles.
//
// Blocks (Fig. 10 of the paper): weight, input, metadata, channel index and
// output buffers; one scheduler per weight channel (32, together the
// "BitVert scheduler"); the group activation-sum generator; the 16 x 32 PE
// array; and a sequencer.  An external host fills the buffers through the
// write ports, programs a job through `cfg`, pulses `start`, waits for
// `done` and reads the results from the output buffer, where they are stored
// in the original channel order: word o_base + tile*o_stride + channel holds
// the 16 window outputs (24-bit) of that channel.
//
// Timing: a tile of 32 channels x 16 windows with K = 16*kgroups takes
// kgroups*ncol + 34 cycles; a job of nchb x nwt tiles takes
// nchb*nwt*(kgroups*ncol + 34) cycles from the start pulse to done.
// The host must not write a buffer that a running job reads.
module bitvert_top
  import bv_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  // job control
  input  logic                              start,
  input  bv_cfg_t                           cfg,
  output logic                              busy,
  output logic                              done,
  // host write port: weight buffer (one bit column for each of 32 channels)
  input  logic                              wb_we,
  input  logic [COLS-1:0]                   wb_wbe,
  input  logic [$clog2(WB_DEPTH)-1:0]       wb_waddr,
  input  logic [COLS-1:0][GROUP-1:0]        wb_wdata,
  // host write port: input buffer (one activation group of one window)
  input  logic                              ib_we,
  input  logic [$clog2(ROWS)-1:0]           ib_wbank,
  input  logic [$clog2(IB_DEPTH)-1:0]       ib_waddr,
  input  act_t [GROUP-1:0]                  ib_wdata,
  // host write port: metadata buffer
  input  logic                              mb_we,
  input  logic [COLS-1:0]                   mb_wbe,
  input  logic [$clog2(MB_DEPTH)-1:0]       mb_waddr,
  input  bbs_meta_t [COLS-1:0]              mb_wdata,
  // host write port: channel index buffer
  input  logic                              cb_we,
  input  logic [$clog2(CB_DEPTH)-1:0]       cb_waddr,
  input  logic [CIDXW-1:0]                  cb_wdata,
  // host read port: output buffer
  input  logic                              ob_re,
  input  logic [$clog2(OB_DEPTH)-1:0]       ob_raddr,
  output acc_t [ROWS-1:0]                   ob_rdata
);

  // sequencer outputs
  logic        w_re, m_re, i_re, c_re;
  logic [11:0] w_raddr, c_raddr;
  logic [9:0]  m_raddr, i_raddr;
  logic        sch_en, sch_first, act_load, acc_en, shift, ob_we;
  logic [9:0]  ob_tile;
  logic [10:0] ob_base, ob_stride;
  logic        ob_acc;

  // buffer read data
  logic [COLS-1:0][GROUP-1:0]  wcols;
  bbs_meta_t [COLS-1:0]        metas;
  act_t [ROWS-1:0][GROUP-1:0]  acts, acts_q;
  logic [CIDXW-1:0]            orig_idx;

  subsum_t   [ROWS-1:0][NSUB-1:0] suma;
  col_ctrl_t [COLS-1:0]           ctrl;
  acc_t      [ROWS-1:0]           out_col;

  bv_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .w_re, .w_raddr, .m_re, .m_raddr, .i_re, .i_raddr, .c_re, .c_raddr,
    .sch_en, .sch_first, .act_load, .acc_en, .shift,
    .ob_we, .ob_tile, .ob_base, .ob_stride, .ob_acc
  );

  bv_weight_buf u_wbuf (
    .clk, .we(wb_we), .wbe(wb_wbe), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(wcols)
  );

  bv_input_buf u_ibuf (
    .clk, .we(ib_we), .wbank(ib_wbank), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(i_re), .raddr(i_raddr), .rdata(acts)
  );

  bv_meta_buf u_mbuf (
    .clk, .we(mb_we), .wbe(mb_wbe), .waddr(mb_waddr), .wdata(mb_wdata),
    .re(m_re), .raddr(m_raddr), .rdata(metas)
  );

  bv_cidx_buf u_cbuf (
    .clk, .we(cb_we), .waddr(cb_waddr), .wdata(cb_wdata),
    .re(c_re), .raddr(c_raddr), .rdata(orig_idx)
  );

  // activation register: holds one group for all its bit columns
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acts_q <= '0;
    else if (act_load) acts_q <= acts;
  end

  bv_suma_gen u_suma (
    .clk, .rst_n, .load(act_load), .act(acts), .suma(suma)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_sched
    bv_scheduler u_sched (
      .clk, .rst_n, .en(sch_en), .first(sch_first),
      .wcol(wcols[c]), .meta(metas[c]), .ctrl(ctrl[c])
    );
  end

  bv_pe_array u_array (
    .clk, .rst_n, .act(acts_q), .suma(suma), .ctrl(ctrl),
    .acc_en, .shift, .out_col
  );

  bv_output_buf u_obuf (
    .clk, .we(ob_we), .acc(ob_acc), .o_base(ob_base), .o_stride(ob_stride), .tile(ob_tile),
    .orig_idx, .wdata(out_col), .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata)
  );

endmodule
