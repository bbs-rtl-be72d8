// tb_bv_pe: self-checking testbench of one BitVert PE.
//
// Draws random compressed weight groups (redundant columns 0..3, 2..8-R
// stored columns, random BBS constant) and random signed activations, drives
// the PE column by column with control built by an independent reference
// encoder, and compares the accumulator with the integer dot product.  Several
// groups are accumulated before a check; the out_prev/shift path is checked
// by loading a random neighbour value.  A group of ncol columns must take
// exactly ncol cycles.
module tb_bv_pe;
  import bv_pkg::*;
  import tb_bv_util::*;

  logic clk = 0, rst_n = 0;
  act_t      [GROUP-1:0] act;
  subsum_t   [NSUB-1:0]  suma;
  col_ctrl_t             ctrl;
  logic                  acc_en, shift;
  acc_t                  out_prev, out;
  int checks = 0, failures = 0;

  bv_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_group(inout longint expect_sum, output int cycles);
    int redun, ncol, bconst;
    logic [WBITS-1:0] cols [GROUP];
    logic [GROUP-1:0] colbits;
    redun  = $urandom_range(0, 3);
    ncol   = $urandom_range(2, WBITS - redun);
    bconst = $urandom_range(0, 63);
    for (int i = 0; i < GROUP; i++) begin
      act[i]  = act_t'($urandom);
      cols[i] = rand_cols(ncol);
    end
    for (int s = 0; s < NSUB; s++) begin
      suma[s] = '0;
      for (int i = 0; i < SUBGROUP; i++) suma[s] += SUBSUMW'(act[s*SUBGROUP+i]);
    end
    for (int i = 0; i < GROUP; i++)
      expect_sum += longint'(decode(cols[i], ncol, redun, bconst)) * longint'(act[i]);
    cycles = 0;
    for (int j = 0; j < ncol; j++) begin
      for (int i = 0; i < GROUP; i++) colbits[i] = cols[i][ncol-1-j];
      ctrl   = enc_column(colbits, j, redun, bconst);
      acc_en = 1;
      shift  = 0;
      @(posedge clk); #1;
      cycles++;
    end
    acc_en = 0;
  endtask

  initial begin
    longint exp_v;
    int cyc;
    acc_en = 0; shift = 0; out_prev = '0; ctrl = '0; act = '0; suma = '0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    checks++; if (out !== '0) begin failures++; $display("reset value wrong"); end
    exp_v = 0;
    for (int t = 0; t < 3000; t++) begin
      // every 8th trial: restart from a neighbour value through out_prev
      if (t % 8 == 0) begin
        out_prev = acc_t'($urandom);
        shift = 1; acc_en = 0;
        @(posedge clk); #1;
        shift = 0;
        exp_v = longint'(out_prev);
        checks++;
        if (out !== out_prev) begin failures++; $display("shift load failed"); end
      end
      run_group(exp_v, cyc);
      checks++;
      if (out !== acc_t'(exp_v)) begin
        failures++;
        if (failures < 10) $display("trial %0d: out=%0d expected=%0d", t, out, acc_t'(exp_v));
      end
      // idle cycle keeps the value
      @(posedge clk); #1;
      checks++;
      if (out !== acc_t'(exp_v)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
