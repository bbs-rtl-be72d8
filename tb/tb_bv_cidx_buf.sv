// tb_bv_cidx_buf: self-checking testbench of the channel index buffer.
// Stores a random permutation of channel indices, then reads random entries
// back: data must appear one cycle after the read and stay while the read
// enable is low.
module tb_bv_cidx_buf;
  import bv_pkg::*;
  localparam int unsigned D = 128;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic we, re;
  logic [$clog2(D)-1:0] waddr, raddr;
  logic [CIDXW-1:0] wdata, rdata;
  logic [CIDXW-1:0] model [D];

  bv_cidx_buf #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [D];
    int a;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < D; i++) perm[i] = i * 7 + 100;
    perm.shuffle();
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = CIDXW'(perm[i]); model[i] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = 1; waddr = 7'($urandom); wdata = CIDXW'($urandom); model[waddr] = wdata;
      @(negedge clk); we = 0; re = 1; raddr = 7'($urandom);
      @(negedge clk); re = 0;
      checks++; if (rdata !== model[raddr]) failures++;
      a = int'(raddr);
      raddr = raddr + 1'b1;   // a new address without re must not disturb the data
      @(negedge clk);
      checks++; if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
