// tb_bv_meta_buf: self-checking testbench of the metadata buffer.
// Writes random metadata rows with random bank masks, keeps a reference copy
// and reads back: data must appear one cycle after the read and stay while
// the read enable is low.
module tb_bv_meta_buf;
  import bv_pkg::*;
  localparam int unsigned D = 64;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic we, re;
  logic [COLS-1:0] wbe;
  logic [$clog2(D)-1:0] waddr, raddr;
  bbs_meta_t [COLS-1:0] wdata, rdata;
  bbs_meta_t [COLS-1:0] model [D];

  bv_meta_buf #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; wbe = '0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; wbe = '1; waddr = 6'(a);
      for (int b = 0; b < COLS; b++) wdata[b] = bbs_meta_t'($urandom);
      model[a] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = 1; waddr = 6'($urandom); wbe = COLS'($urandom);
      for (int b = 0; b < COLS; b++) begin
        wdata[b] = bbs_meta_t'($urandom);
        if (wbe[b]) model[waddr][b] = wdata[b];
      end
      @(negedge clk); we = 0; re = 1; raddr = 6'($urandom);
      @(negedge clk); re = 0;
      checks++; if (rdata !== model[raddr]) failures++;
      @(negedge clk);
      checks++; if (rdata !== model[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
