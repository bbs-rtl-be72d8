// tb_bitvert_top: end-to-end testbench of the BitVert accelerator at its
// default size (16 x 32 PE array, full buffers).
//
// It builds one convolution-like layer: NWIN input windows (2 tiles of 16),
// K = 16*KG reduction elements and 96 output channels.  The channels are
// randomly permuted and split into chunks of equal precision, as channel
// reordering does: 32 "sensitive" channels kept at 8 bits (8 stored columns,
// no metadata), 32 channels with 2 columns pruned and 32 with 4 pruned.  The
// pruned groups get random redundant-column counts and BBS constants.  Each
// chunk is one job.  The testbench writes the buffers through the host ports,
// runs the jobs, reads the output buffer and compares every output with the
// integer dot product in original channel order.  It checks each job's cycle
// count (nchb*nwt*(KG*ncol + 34)) and counts how often each mechanism
// occurred: inverted (one-skipping) and plain sub-group columns, idle terms
// (val = 0), groups with redundant columns, both BBS constant slices, the
// sign column, shift-out of a tile, accumulating write-back (the last chunk
// is run a second time with acc_out, as when a long reduction is split), and
// channels restored from a permuted
// position.  A mechanism that never occurred counts as a failure.
module tb_bitvert_top;
  import bv_pkg::*;
  import tb_bv_util::*;

  localparam int KG    = 3;           // 48-element reduction, metadata of the last pair half used
  localparam int NWIN  = 32;
  localparam int NWT   = NWIN / ROWS;
  localparam int NCH   = 96;
  localparam int NCHUNK = 3;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  bv_cfg_t cfg;
  logic wb_we; logic [COLS-1:0] wb_wbe; logic [$clog2(WB_DEPTH)-1:0] wb_waddr;
  logic [COLS-1:0][GROUP-1:0] wb_wdata;
  logic ib_we; logic [$clog2(ROWS)-1:0] ib_wbank; logic [$clog2(IB_DEPTH)-1:0] ib_waddr;
  act_t [GROUP-1:0] ib_wdata;
  logic mb_we; logic [COLS-1:0] mb_wbe; logic [$clog2(MB_DEPTH)-1:0] mb_waddr;
  bbs_meta_t [COLS-1:0] mb_wdata;
  logic cb_we; logic [$clog2(CB_DEPTH)-1:0] cb_waddr; logic [CIDXW-1:0] cb_wdata;
  logic ob_re; logic [$clog2(OB_DEPTH)-1:0] ob_raddr; acc_t [ROWS-1:0] ob_rdata;

  bitvert_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // layer data
  act_t             A    [NWIN][KG*GROUP];
  logic [WBITS-1:0] wcol [NCH][KG*GROUP];     // stored columns of each weight
  int               red  [NCH][(KG+1)/2];
  int               bcn  [NCH][(KG+1)/2];
  int               orig [NCH];               // stored position -> original channel
  int               chunk_ncol [NCHUNK] = '{8, 6, 4};
  longint           golden [NWIN][NCH];

  // mechanism counters
  int n_inv, n_plain, n_idle, n_redun, n_lo, n_hi, n_msb, n_shift, n_perm, n_accwb;

  always @(posedge clk) if (rst_n && dut.acc_en) begin
    for (int c = 0; c < COLS; c++) begin
      for (int s = 0; s < NSUB; s++) begin
        if (dut.ctrl[c].sub[s].inv) n_inv++; else n_plain++;
        for (int k = 0; k < NSEL; k++) if (!dut.ctrl[c].sub[s].val[k]) n_idle++;
      end
      if (dut.ctrl[c].is_msb) begin
        n_msb++;
        if (dut.ctrl[c].col_idx != 3'd7) n_redun++;
        if (dut.ctrl[c].bconst != 0) n_lo++;
      end
      if (dut.ctrl[c].bhi && dut.ctrl[c].bconst != 0) n_hi++;
    end
  end
  always @(posedge clk) if (rst_n && dut.shift) n_shift++;
  always @(posedge clk) if (rst_n && dut.ob_we && dut.ob_acc) n_accwb++;

  initial begin
    int ncol, ch, cb, w, a, cycles, pos, p;
    int perm [NCH];
    start = 0; cfg = '0;
    wb_we = 0; wb_wbe = '0; wb_waddr = '0; wb_wdata = '0;
    ib_we = 0; ib_wbank = '0; ib_waddr = '0; ib_wdata = '0;
    mb_we = 0; mb_wbe = '0; mb_waddr = '0; mb_wdata = '0;
    cb_we = 0; cb_waddr = '0; cb_wdata = '0;
    ob_re = 0; ob_raddr = '0;
    n_inv = 0; n_plain = 0; n_idle = 0; n_redun = 0; n_lo = 0; n_hi = 0; n_msb = 0;
    n_shift = 0; n_perm = 0; n_accwb = 0;

    // ---- build the layer ----
    for (int i = 0; i < NCH; i++) perm[i] = i;
    perm.shuffle();
    for (int i = 0; i < NCH; i++) begin
      orig[i] = perm[i];
      if (orig[i] != i) n_perm++;
    end
    for (int wi = 0; wi < NWIN; wi++)
      for (int k = 0; k < KG*GROUP; k++) A[wi][k] = act_t'($urandom);
    for (int i = 0; i < NCH; i++) begin
      ncol = chunk_ncol[i / COLS];
      for (int m = 0; m < (KG+1)/2; m++) begin
        red[i][m] = $urandom_range(0, (8 - ncol) > 3 ? 3 : (8 - ncol));
        bcn[i][m] = (ncol == 8) ? 0 : $urandom_range(0, (1 << (8 - ncol - red[i][m])) - 1);
      end
      for (int k = 0; k < KG*GROUP; k++) wcol[i][k] = rand_cols(ncol);
    end
    for (int wi = 0; wi < NWIN; wi++)
      for (int i = 0; i < NCH; i++) begin
        golden[wi][orig[i]] = 0;
        ncol = chunk_ncol[i / COLS];
        for (int k = 0; k < KG*GROUP; k++)
          golden[wi][orig[i]] += longint'(A[wi][k]) *
            longint'(decode(wcol[i][k], ncol, red[i][k/CGROUP], bcn[i][k/CGROUP]));
        if (i / COLS == NCHUNK - 1) golden[wi][orig[i]] *= 2;   // run twice, accumulated
      end

    #12 rst_n = 1;
    @(negedge clk);

    // ---- fill the buffers ----
    for (int wt = 0; wt < NWT; wt++)
      for (int g = 0; g < KG; g++)
        for (int r = 0; r < ROWS; r++) begin
          ib_we = 1; ib_wbank = 4'(r); ib_waddr = 10'(wt*KG + g);
          for (int i = 0; i < GROUP; i++) ib_wdata[i] = A[wt*ROWS + r][g*GROUP + i];
          @(negedge clk);
        end
    ib_we = 0;
    for (int i = 0; i < NCH; i++) begin
      cb_we = 1; cb_waddr = 12'(i); cb_wdata = CIDXW'(orig[i]);
      @(negedge clk);
    end
    cb_we = 0;
    // each chunk: weights at 256*chunk, metadata at 16*chunk
    for (int ck = 0; ck < NCHUNK; ck++) begin
      ncol = chunk_ncol[ck];
      for (int g = 0; g < KG; g++)
        for (int j = 0; j < ncol; j++) begin
          wb_we = 1; wb_wbe = '1; wb_waddr = 12'(256*ck + g*ncol + j);
          for (int c = 0; c < COLS; c++)
            for (int i = 0; i < GROUP; i++)
              wb_wdata[c][i] = wcol[ck*COLS + c][g*GROUP + i][ncol-1-j];
          @(negedge clk);
        end
      for (int m = 0; m < (KG+1)/2; m++) begin
        mb_we = 1; mb_wbe = '1; mb_waddr = 10'(16*ck + m);
        for (int c = 0; c < COLS; c++) begin
          mb_wdata[c].redun  = 2'(red[ck*COLS + c][m]);
          mb_wdata[c].bconst = 6'(bcn[ck*COLS + c][m]);
        end
        @(negedge clk);
      end
    end
    wb_we = 0; mb_we = 0;

    // ---- run one job per chunk; the last chunk runs twice, the second time
    //      accumulating into the output buffer (a reduction split in two) ----
    for (int jb = 0; jb <= NCHUNK; jb++) begin
      int ck;
      ck = (jb == NCHUNK) ? NCHUNK - 1 : jb;
      cfg = '0;
      cfg.acc_out = (jb == NCHUNK);
      cfg.ncol = 4'(chunk_ncol[ck]); cfg.kgroups = 10'(KG); cfg.nchb = 7'd1; cfg.nwt = 10'(NWT);
      cfg.w_base = 12'(256*ck); cfg.m_base = 10'(16*ck); cfg.i_base = '0;
      cfg.c_base = 12'(ck*COLS); cfg.o_base = '0; cfg.o_stride = 11'(NCH);
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 0;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != NWT * (KG * chunk_ncol[ck] + 34)) begin
        failures++;
        $display("job %0d: %0d cycles, expected %0d", ck, cycles, NWT * (KG * chunk_ncol[ck] + 34));
      end
      @(negedge clk);
    end
    @(negedge clk);

    // ---- compare the output buffer ----
    for (int wt = 0; wt < NWT; wt++)
      for (int o = 0; o < NCH; o++) begin
        ob_re = 1; ob_raddr = 11'(wt*NCH + o);
        @(negedge clk);
        ob_re = 0;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (ob_rdata[r] !== acc_t'(golden[wt*ROWS + r][o])) begin
            failures++;
            if (failures < 10) $display("window %0d channel %0d: %0d expected %0d",
                                        wt*ROWS + r, o, ob_rdata[r], acc_t'(golden[wt*ROWS + r][o]));
          end
        end
      end

    $display("mechanisms: inverted=%0d plain=%0d idle_terms=%0d redundant=%0d bbs_lo=%0d bbs_hi=%0d sign_col=%0d shift_out=%0d permuted=%0d acc_writeback=%0d",
             n_inv, n_plain, n_idle, n_redun, n_lo, n_hi, n_msb, n_shift, n_perm, n_accwb);
    if (n_inv == 0)   begin failures++; $display("never: inverted column"); end
    if (n_plain == 0) begin failures++; $display("never: plain column"); end
    if (n_idle == 0)  begin failures++; $display("never: idle term"); end
    if (n_redun == 0) begin failures++; $display("never: redundant columns"); end
    if (n_lo == 0)    begin failures++; $display("never: BBS low slice"); end
    if (n_hi == 0)    begin failures++; $display("never: BBS high slice"); end
    if (n_shift == 0) begin failures++; $display("never: shift-out"); end
    if (n_perm == 0)  begin failures++; $display("never: permuted channel"); end
    if (n_accwb == 0) begin failures++; $display("never: accumulating write-back"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
