// tb_bv_input_buf: self-checking testbench of the input buffer.
// Writes random activation groups into random banks and addresses, keeps a
// reference copy and reads all 16 banks back with one address: data must
// appear one cycle after the read and stay while the read enable is low.
module tb_bv_input_buf;
  import bv_pkg::*;
  localparam int unsigned D = 32;
  logic clk = 0;
  int checks = 0, failures = 0;
  logic we, re;
  logic [$clog2(ROWS)-1:0] wbank;
  logic [$clog2(D)-1:0] waddr, raddr;
  act_t [GROUP-1:0] wdata;
  act_t [ROWS-1:0][GROUP-1:0] rdata;
  act_t [ROWS-1:0][GROUP-1:0] model [D];

  bv_input_buf #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_one(input int b, input int a);
    @(negedge clk);
    we = 1; wbank = 4'(b); waddr = 5'(a);
    for (int i = 0; i < GROUP; i++) wdata[i] = act_t'($urandom);
    model[a][b] = wdata;
  endtask

  initial begin
    we = 0; re = 0; wbank = '0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < D; a++)
      for (int b = 0; b < ROWS; b++) write_one(b, a);
    for (int t = 0; t < 3000; t++) begin
      write_one($urandom_range(0, ROWS-1), $urandom_range(0, D-1));
      @(negedge clk); we = 0; re = 1; raddr = 5'($urandom);
      @(negedge clk); re = 0;
      checks++; if (rdata !== model[raddr]) failures++;
      @(negedge clk);
      checks++; if (rdata !== model[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
