// tb_bv_ctrl: self-checking testbench of the tile sequencer.
//
// For random job configurations it builds, from the loop nest in the block
// description, the expected per-cycle read requests (weight, input,
// metadata, channel index), shift/write-back strobes and tile number, and
// compares them with the sequencer cycle by cycle.  It also checks that the
// stage-1 and stage-2 strobes are the stage-0 requests delayed by one and two
// cycles, and that a job takes nchb*nwt*(kgroups*ncol + 34) cycles from
// start to done.
module tb_bv_ctrl;
  import bv_pkg::*;

  logic clk = 0, rst_n = 0, start;
  bv_cfg_t cfg;
  logic busy, done, w_re, m_re, i_re, c_re, sch_en, sch_first, act_load, acc_en, shift, ob_we;
  logic [11:0] w_raddr, c_raddr;
  logic [9:0]  m_raddr, i_raddr, ob_tile;
  logic [10:0] ob_base, ob_stride;
  logic        ob_acc;
  int checks = 0, failures = 0;

  bv_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    bit w_re; int w_a; bit i_re; int i_a; bit m_re; int m_a; bit c_re; int c_a;
    bit shift; int tile;
  } exp_t;
  exp_t q[$];

  task automatic build(input bv_cfg_t c);
    exp_t e;
    q.delete();
    for (int cb = 0; cb < c.nchb; cb++)
      for (int wt = 0; wt < c.nwt; wt++) begin
        for (int g = 0; g < c.kgroups; g++)
          for (int j = 0; j < c.ncol; j++) begin
            e = '{default: 0};
            e.w_re = 1; e.w_a = (c.w_base + (cb * c.kgroups + g) * c.ncol + j) % 4096;
            e.i_re = (j == 0); e.i_a = (c.i_base + wt * c.kgroups + g) % 1024;
            e.m_re = (j == 0); e.m_a = (c.m_base + cb * ((c.kgroups + 1) / 2) + g / 2) % 1024;
            e.tile = wt;
            q.push_back(e);
          end
        e = '{default: 0}; e.tile = wt; q.push_back(e);
        e.c_re = 1; e.c_a = (c.c_base + cb * 32 + 31) % 4096; q.push_back(e);
        for (int d = 0; d < 32; d++) begin
          e = '{default: 0}; e.tile = wt; e.shift = 1;
          e.c_re = (d != 31); e.c_a = (c.c_base + cb * 32 + 31 - (d + 1)) % 4096;
          q.push_back(e);
        end
      end
  endtask

  initial begin
    exp_t e;
    int n, cyc;
    logic [1:0] wre_d, first_d;
    start = 0; cfg = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      cfg = '0;
      cfg.ncol = 4'($urandom_range(2, 8));
      cfg.kgroups = 10'($urandom_range(1, 7));
      cfg.nchb = 7'($urandom_range(1, 3));
      cfg.nwt = 10'($urandom_range(1, 3));
      cfg.w_base = 12'($urandom); cfg.m_base = 10'($urandom); cfg.i_base = 10'($urandom);
      cfg.c_base = 12'($urandom); cfg.o_base = 11'($urandom); cfg.o_stride = 11'($urandom);
      cfg.acc_out = 1'($urandom);
      build(cfg);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n = q.size();
      cyc = 0;
      wre_d = '0; first_d = '0;
      while (!done) begin
        checks++;
        if (cyc >= n) begin failures++; break; end
        e = q[cyc];
        if (w_re !== e.w_re || (e.w_re && w_raddr !== 12'(e.w_a))
            || i_re !== e.i_re || (e.i_re && i_raddr !== 10'(e.i_a))
            || m_re !== e.m_re || (e.m_re && m_raddr !== 10'(e.m_a))
            || c_re !== e.c_re || (e.c_re && c_raddr !== 12'(e.c_a))
            || shift !== e.shift || ob_we !== e.shift || (e.shift && ob_tile !== 10'(e.tile))
            || sch_en !== wre_d[0] || sch_first !== first_d[0] || act_load !== first_d[0]
            || acc_en !== wre_d[1] || !busy || ob_base !== cfg.o_base || ob_stride !== cfg.o_stride
            || ob_acc !== cfg.acc_out) begin
          failures++;
          if (failures < 10) $display("job %0d cycle %0d mismatch (w_re=%0b w_a=%0d exp %0b/%0d)",
                                      t, cyc, w_re, w_raddr, e.w_re, e.w_a);
        end
        wre_d   = {wre_d[0], w_re};
        first_d = {first_d[0], i_re};
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != cfg.nchb * cfg.nwt * (cfg.kgroups * cfg.ncol + 34)) begin
        failures++;
        $display("job %0d took %0d cycles", t, cyc);
      end
      @(negedge clk);
      checks++; if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
