// tb_bv_scheduler: self-checking testbench of the BitVert scheduler.
//
// Part 1 feeds all 65536 possible 16-bit bit columns and checks, one cycle
// later, that per 8-bit sub-group the inversion flag equals "more than four
// ones" and that the positions named by (term k, sel_k, val_k) are exactly
// the set bits of the (possibly inverted) sub-group column, each once.
// Part 2 runs random groups and checks the shift control (col_idx starts at
// 7 - #RedunCol and counts down, is_msb only on the first column) and the
// two 3-bit slices of the BBS constant in the first two cycles.
module tb_bv_scheduler;
  import bv_pkg::*;

  logic clk = 0, rst_n = 0;
  logic en, first;
  logic [GROUP-1:0] wcol;
  bbs_meta_t meta;
  col_ctrl_t ctrl;
  int checks = 0, failures = 0;

  bv_scheduler dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit check_cols(input logic [GROUP-1:0] col, input col_ctrl_t c);
    logic [SUBGROUP-1:0] bits, want, got;
    int pos;
    for (int s = 0; s < NSUB; s++) begin
      bits = col[s*SUBGROUP +: SUBGROUP];
      if (c.sub[s].inv !== ($countones(bits) > 4)) return 0;
      want = c.sub[s].inv ? ~bits : bits;
      got  = '0;
      for (int k = 0; k < NSEL; k++)
        if (c.sub[s].val[k]) begin
          if (c.sub[s].sel[k] > 4) return 0;
          pos = k + int'(c.sub[s].sel[k]);
          if (got[pos]) return 0;
          got[pos] = 1'b1;
        end
      if (got !== want) return 0;
    end
    return 1;
  endfunction

  initial begin
    int redun, ncol, bc;
    en = 0; first = 0; wcol = '0; meta = '0;
    #12 rst_n = 1;
    @(negedge clk);
    // part 1: every column value
    for (int v = 0; v < 65536; v++) begin
      en = 1; first = 1'(v % 3 == 0); wcol = GROUP'(v);
      @(posedge clk); #1;
      checks++;
      if (!check_cols(GROUP'(v), ctrl)) begin
        failures++;
        if (failures < 10) $display("column %h scheduled wrongly", v);
      end
      @(negedge clk);
    end
    // part 2: shift control and BBS constant slices
    for (int t = 0; t < 2000; t++) begin
      redun = $urandom_range(0, 3);
      ncol  = $urandom_range(2, 8 - redun);
      bc    = $urandom_range(0, 63);
      for (int j = 0; j < ncol; j++) begin
        en = 1; first = (j == 0); wcol = GROUP'($urandom);
        meta.redun = 2'(redun); meta.bconst = 6'(bc);
        if (j != 0) meta = bbs_meta_t'($urandom);   // ignored after the first column
        @(posedge clk); #1;
        checks++;
        if (ctrl.col_idx !== 3'(7 - redun - j) || ctrl.is_msb !== (j == 0)
            || ctrl.bconst !== ((j == 0) ? 3'(bc) : (j == 1) ? 3'(bc >> 3) : 3'd0)
            || ctrl.bhi !== (j == 1)) begin
          failures++;
          if (failures < 10) $display("group %0d col %0d: col_idx=%0d msb=%0b bconst=%0d bhi=%0b",
                                      t, j, ctrl.col_idx, ctrl.is_msb, ctrl.bconst, ctrl.bhi);
        end
        @(negedge clk);
      end
      // a cycle without en must hold the control
      en = 0; wcol = ~wcol;
      @(posedge clk); #1;
      checks++;
      if (ctrl.col_idx !== 3'(7 - redun - (ncol - 1))) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
