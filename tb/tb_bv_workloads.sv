// tb_bv_workloads: runs slices of the evaluated networks' layers through the
// full-size BitVert top, with weights compressed the way the offline binary
// pruning does it rather than drawn at random.
//
// For each workload the testbench draws 96 output channels of Gaussian-like
// real weights, quantizes each channel to int8 (per-channel scale, largest
// magnitude -> 127), permutes the channels and splits them into three chunks
// of 32, as channel reordering does:
//   * sensitive chunk: kept at 8 bits (8 stored columns, empty metadata);
//   * conservative chunk: 2 columns pruned per 32-weight group by rounded
//     averaging: redundant sign columns first (at most 2 here), then the low
//     S = 2 - R bits of every weight are replaced by their rounded mean C;
//   * moderate chunk: 4 columns pruned by zero-point shifting: every 6-bit
//     constant c is tried, the group is shifted by -c and clipped, its
//     redundant columns counted (at most 3), the low S = 4 - R bits rounded to
//     zero, and the c with the least squared error against the int8 weights
//     is kept; the hardware adds c back through the BBS constant.
// The reduction length K of each slice is the one of a real layer:
//   3x3 convolution over 64 channels (ResNet-34/50, VGG-16 block 2): K = 576
//   ViT-S projection (hidden size 384): K = 384
//   ViT-B / BERT-base projection (hidden size 768): K = 768
//   Llama-3-8B projection (hidden size 4096): K = 4096
// with 16 input windows (one tile).  CNN activations are non-negative
// (after ReLU), transformer activations signed.  Each chunk runs as one job;
// the outputs are compared with the dot products of the activations and the
// pruned integer weights in original channel order (modulo 2^24, the
// accumulator width; the number of outputs beyond that range is reported),
// and each job's cycle count must be K/16*ncol + 34.  The groups with
// redundant columns and those whose constant needs the high 3-bit slice are
// counted; a workload set where either never happened counts as a failure.
module tb_bv_workloads;
  import bv_pkg::*;

  localparam int NWL   = 4;
  localparam int MAXK  = 4096;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string wl_name [NWL] = '{"conv3x3 64ch (ResNet/VGG)", "ViT-S proj", "ViT-B/BERT-base proj", "Llama-3-8B proj"};
  int    wl_k    [NWL] = '{576, 384, 768, 4096};
  bit    wl_relu [NWL] = '{1'b1, 1'b0, 1'b0, 1'b0};
  int    chunk_ncol [NCHUNK] = '{8, 6, 4};

  int               A     [ROWS][MAXK];
  int               W     [NCH][MAXK];      // int8 weights, stored order
  int               Wp    [NCH][MAXK];      // after binary pruning
  logic [WBITS-1:0] wcol  [NCH][MAXK];      // stored columns, MSB column in bit ncol-1
  int               red   [NCH][MAXK/CGROUP];
  int               bcn   [NCH][MAXK/CGROUP];
  int               orig  [NCH];
  longint           golden [ROWS][NCH];
  int n_redun, n_hi, n_ovf;
  real sqerr [NCHUNK];

  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 4; i++) s += real'($urandom_range(0, 65535)) / 65535.0;
    return s - 2.0;
  endfunction

  // redundant sign columns of a group: largest r <= rmax with every value
  // inside the signed (8-r)-bit range
  function automatic int redundant(input int v [CGROUP], input int rmax);
    int r;
    r = 0;
    while (r < rmax) begin
      bit fits;
      fits = 1;
      for (int i = 0; i < CGROUP; i++)
        if (v[i] < -(1 << (6 - r)) || v[i] >= (1 << (6 - r))) fits = 0;
      if (!fits) break;
      r++;
    end
    return r;
  endfunction

  // compress one 32-weight group of channel ch starting at k0
  task automatic compress(input int ch, input int k0, input int ncol);
    int np, r, s, p, c, d, best_c, best_r;
    int v [CGROUP];
    int q [CGROUP];
    int best_q [CGROUP];
    int sum;
    longint err, best_err;
    np = WBITS - ncol;
    for (int i = 0; i < CGROUP; i++) v[i] = W[ch][k0 + i];
    if (np == 0) begin
      best_r = 0; best_c = 0;
      for (int i = 0; i < CGROUP; i++) best_q[i] = v[i];
    end else if (np <= 2) begin
      // rounded averaging
      best_r = redundant(v, np);
      s = np - best_r;
      sum = 0;
      for (int i = 0; i < CGROUP; i++) sum += v[i] & ((1 << s) - 1);
      best_c = (sum + CGROUP / 2) / CGROUP;
      for (int i = 0; i < CGROUP; i++) best_q[i] = v[i] - (v[i] & ((1 << s) - 1));
    end else begin
      // zero-point shifting
      best_err = -1; best_r = 0; best_c = 0;
      for (c = 0; c < (1 << CONSTW); c++) begin
        int sh [CGROUP];
        for (int i = 0; i < CGROUP; i++) begin
          sh[i] = v[i] - c;
          if (sh[i] < -128) sh[i] = -128;
        end
        r = redundant(sh, (np > 3) ? 3 : np);
        s = np - r;
        p = WBITS - r;
        err = 0;
        for (int i = 0; i < CGROUP; i++) begin
          q[i] = ((sh[i] + (1 << (s - 1))) >>> s) << s;
          if (q[i] > (1 << (p - 1)) - (1 << s)) q[i] = (1 << (p - 1)) - (1 << s);
          d = q[i] + c - v[i];
          err += longint'(d * d);
        end
        if (best_err < 0 || err < best_err) begin
          best_err = err; best_r = r; best_c = c;
          best_q = q;
        end
      end
    end
    s = np - best_r;
    red[ch][k0 / CGROUP] = best_r;
    bcn[ch][k0 / CGROUP] = best_c;
    if (best_r > 0) n_redun++;
    if (best_c >= (1 << CHUNKW)) n_hi++;
    for (int i = 0; i < CGROUP; i++) begin
      Wp[ch][k0 + i]   = best_q[i] + best_c;
      wcol[ch][k0 + i] = WBITS'((best_q[i] >>> s) & ((1 << ncol) - 1));
      sqerr[ch / COLS] += real'((Wp[ch][k0 + i] - v[i]) * (Wp[ch][k0 + i] - v[i]));
    end
  endtask

  initial begin
    int kg, k, ncol, cycles;
    int perm [NCH];
    real x [MAXK];
    real mx;
    start = 0; cfg = '0;
    wb_we = 0; wb_wbe = '0; wb_waddr = '0; wb_wdata = '0;
    ib_we = 0; ib_wbank = '0; ib_waddr = '0; ib_wdata = '0;
    mb_we = 0; mb_wbe = '0; mb_waddr = '0; mb_wdata = '0;
    cb_we = 0; cb_waddr = '0; cb_wdata = '0;
    ob_re = 0; ob_raddr = '0;
    n_redun = 0; n_hi = 0;
    #12 rst_n = 1;
    @(negedge clk);

    for (int wl = 0; wl < NWL; wl++) begin
      k  = wl_k[wl];
      kg = k / GROUP;
      n_ovf = 0;
      for (int c = 0; c < NCHUNK; c++) sqerr[c] = 0.0;

      // ---- layer slice ----
      for (int i = 0; i < NCH; i++) perm[i] = i;
      perm.shuffle();
      for (int i = 0; i < NCH; i++) orig[i] = perm[i];
      for (int r = 0; r < ROWS; r++)
        for (int e = 0; e < k; e++)
          A[r][e] = wl_relu[wl] ? int'($urandom_range(0, 127)) : int'($urandom_range(0, 255)) - 128;
      for (int i = 0; i < NCH; i++) begin
        mx = 0.0;
        for (int e = 0; e < k; e++) begin
          x[e] = gauss();
          if (x[e] > mx) mx = x[e];
          if (-x[e] > mx) mx = -x[e];
        end
        for (int e = 0; e < k; e++) W[i][e] = int'(x[e] * 127.0 / mx);
        ncol = chunk_ncol[i / COLS];
        for (int e = 0; e < k; e += CGROUP) compress(i, e, ncol);
      end
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < NCH; i++) begin
          golden[r][orig[i]] = 0;
          for (int e = 0; e < k; e++) golden[r][orig[i]] += longint'(A[r][e]) * longint'(Wp[i][e]);
          if (golden[r][orig[i]] >= (1 << (ACCW - 1)) || golden[r][orig[i]] < -(1 << (ACCW - 1))) n_ovf++;
        end

      // ---- activations and channel indices ----
      for (int g = 0; g < kg; g++)
        for (int r = 0; r < ROWS; r++) begin
          ib_we = 1; ib_wbank = 4'(r); ib_waddr = 10'(g);
          for (int i = 0; i < GROUP; i++) ib_wdata[i] = act_t'(A[r][g*GROUP + i]);
          @(negedge clk);
        end
      ib_we = 0;
      for (int i = 0; i < NCH; i++) begin
        cb_we = 1; cb_waddr = 12'(i); cb_wdata = CIDXW'(orig[i]);
        @(negedge clk);
      end
      cb_we = 0;

      // ---- one job per chunk, its weights loaded just before ----
      for (int ck = 0; ck < NCHUNK; ck++) begin
        ncol = chunk_ncol[ck];
        for (int g = 0; g < kg; g++)
          for (int j = 0; j < ncol; j++) begin
            wb_we = 1; wb_wbe = '1; wb_waddr = 12'(g*ncol + j);
            for (int c = 0; c < COLS; c++)
              for (int i = 0; i < GROUP; i++)
                wb_wdata[c][i] = wcol[ck*COLS + c][g*GROUP + i][ncol-1-j];
            @(negedge clk);
          end
        wb_we = 0;
        for (int m = 0; m < k / CGROUP; m++) begin
          mb_we = 1; mb_wbe = '1; mb_waddr = 10'(m);
          for (int c = 0; c < COLS; c++) begin
            mb_wdata[c].redun  = 2'(red[ck*COLS + c][m]);
            mb_wdata[c].bconst = 6'(bcn[ck*COLS + c][m]);
          end
          @(negedge clk);
        end
        mb_we = 0;
        cfg = '0;
        cfg.ncol = 4'(ncol); cfg.kgroups = 10'(kg); cfg.nchb = 7'd1; cfg.nwt = 10'd1;
        cfg.c_base = 12'(ck*COLS); cfg.o_stride = 11'(NCH);
        start = 1;
        @(negedge clk);
        start = 0;
        cycles = 0;
        while (!done) begin @(negedge clk); cycles++; end
        checks++;
        if (cycles != kg * ncol + 34) begin
          failures++;
          $display("%s chunk %0d: %0d cycles, expected %0d", wl_name[wl], ck, cycles, kg * ncol + 34);
        end
        @(negedge clk);
      end
      @(negedge clk);

      // ---- compare ----
      for (int o = 0; o < NCH; o++) begin
        ob_re = 1; ob_raddr = 11'(o);
        @(negedge clk);
        ob_re = 0;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (ob_rdata[r] !== acc_t'(golden[r][o])) begin
            failures++;
            if (failures < 10) $display("%s window %0d channel %0d: %0d expected %0d",
                                        wl_name[wl], r, o, ob_rdata[r], acc_t'(golden[r][o]));
          end
        end
      end
      $display("%s: K=%0d, mean squared pruning error cons=%0.3f mod=%0.3f, outputs beyond 24 bits=%0d",
               wl_name[wl], k, sqerr[1] / real'(COLS * k), sqerr[2] / real'(COLS * k), n_ovf);
    end

    $display("groups with redundant columns=%0d, constants using the high slice=%0d", n_redun, n_hi);
    checks += 2;
    if (n_redun == 0) begin failures++; $display("never: redundant columns"); end
    if (n_hi == 0)    begin failures++; $display("never: BBS high slice"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
