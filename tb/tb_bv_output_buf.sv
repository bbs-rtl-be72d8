// tb_bv_output_buf: self-checking testbench of the output buffer.
// Writes output columns with random base, tile, stride and original channel
// index and checks, through the read port, that each landed at
// base + tile*stride + index (the unshuffled position), with one cycle read
// latency and data held while the read enable is low.  Half of the writes
// to an already written word use the accumulate mode and must add to it.
module tb_bv_output_buf;
  import bv_pkg::*;
  localparam int unsigned D = 256;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic we, re, acc;
  logic [10:0] o_base, o_stride;
  logic [9:0]  tile;
  logic [CIDXW-1:0] orig_idx;
  acc_t [ROWS-1:0] wdata, rdata;
  logic [$clog2(D)-1:0] raddr;
  acc_t [ROWS-1:0] model [D];
  bit written [D];

  bv_output_buf #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    we = 0; acc = 0; re = 0; o_base = '0; o_stride = '0; tile = '0; orig_idx = '0; wdata = '0; raddr = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      o_stride = 11'($urandom_range(1, 40));
      tile     = 10'($urandom_range(0, 3));
      orig_idx = CIDXW'($urandom_range(0, o_stride - 1));
      o_base   = 11'($urandom_range(0, 60));
      for (int r = 0; r < ROWS; r++) wdata[r] = acc_t'($urandom);
      a = o_base + tile * o_stride + orig_idx;
      // accumulate only onto words written before (the rest hold random data)
      acc = written[a] && ($urandom_range(0, 1) == 1);
      for (int r = 0; r < ROWS; r++) model[a][r] = acc ? model[a][r] + wdata[r] : wdata[r];
      we = 1; written[a] = 1;
      @(negedge clk); we = 0; re = 1; raddr = 8'(a);
      @(negedge clk); re = 0;
      checks++; if (rdata !== model[a]) failures++;
      @(negedge clk);
      checks++; if (rdata !== model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
