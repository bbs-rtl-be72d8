// tb_bv_suma_gen: self-checking testbench of the activation-sum generator.
// Loads random signed activation groups for all 16 rows, checks both 8-element
// sub-group sums one cycle after `load`, and checks that they hold while
// `load` is low and the activations change.
module tb_bv_suma_gen;
  import bv_pkg::*;

  logic clk = 0, rst_n = 0, load;
  act_t    [ROWS-1:0][GROUP-1:0] act;
  subsum_t [ROWS-1:0][NSUB-1:0]  suma;
  int checks = 0, failures = 0;
  int ref_sum [ROWS][NSUB];

  bv_suma_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; act = '0;
    #12 rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < GROUP; i++)
          act[r][i] = (t % 5 == 0) ? act_t'(-128) : act_t'($urandom);
      for (int r = 0; r < ROWS; r++)
        for (int s = 0; s < NSUB; s++) begin
          ref_sum[r][s] = 0;
          for (int i = 0; i < SUBGROUP; i++) ref_sum[r][s] += int'(act[r][s*SUBGROUP+i]);
        end
      load = 1;
      @(posedge clk); #1;
      load = 0;
      for (int r = 0; r < ROWS; r++) act[r] = ~act[r];
      repeat (2) begin
        for (int r = 0; r < ROWS; r++)
          for (int s = 0; s < NSUB; s++) begin
            checks++;
            if (int'(suma[r][s]) != ref_sum[r][s]) begin
              failures++;
              if (failures < 10) $display("row %0d sub %0d: %0d expected %0d", r, s, suma[r][s], ref_sum[r][s]);
            end
          end
        @(posedge clk); #1;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
