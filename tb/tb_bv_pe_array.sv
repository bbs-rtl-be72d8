// tb_bv_pe_array: self-checking testbench of the 16 x 32 PE array.
//
// Every row gets its own random activation group, every column its own
// compressed weight group (all with the same number of stored columns, as in
// a job); control comes from the reference encoder.  After several groups
// the array is drained with `shift`: the outputs must leave the rightmost
// column in the order channel 31, 30, ..., 0, each equal to the integer dot
// product of its row and column, and the array must hold zeros afterwards.
module tb_bv_pe_array;
  import bv_pkg::*;
  import tb_bv_util::*;

  logic clk = 0, rst_n = 0;
  act_t      [ROWS-1:0][GROUP-1:0] act;
  subsum_t   [ROWS-1:0][NSUB-1:0]  suma;
  col_ctrl_t [COLS-1:0]            ctrl;
  logic acc_en, shift;
  acc_t [ROWS-1:0] out_col;
  int checks = 0, failures = 0;
  longint expv [ROWS][COLS];

  bv_pe_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_group(input int ncol);
    int redun [COLS], bc [COLS];
    logic [WBITS-1:0] cols [COLS][GROUP];
    logic [GROUP-1:0] cb;
    for (int r = 0; r < ROWS; r++) begin
      for (int i = 0; i < GROUP; i++) act[r][i] = act_t'($urandom);
      for (int s = 0; s < NSUB; s++) begin
        suma[r][s] = '0;
        for (int i = 0; i < SUBGROUP; i++) suma[r][s] += SUBSUMW'(act[r][s*SUBGROUP+i]);
      end
    end
    for (int c = 0; c < COLS; c++) begin
      redun[c] = $urandom_range(0, 8 - ncol > 3 ? 3 : 8 - ncol);
      bc[c] = $urandom_range(0, 63);
      for (int i = 0; i < GROUP; i++) cols[c][i] = rand_cols(ncol);
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < GROUP; i++)
          expv[r][c] += longint'(decode(cols[c][i], ncol, redun[c], bc[c])) * longint'(act[r][i]);
    end
    for (int j = 0; j < ncol; j++) begin
      for (int c = 0; c < COLS; c++) begin
        for (int i = 0; i < GROUP; i++) cb[i] = cols[c][i][ncol-1-j];
        ctrl[c] = enc_column(cb, j, redun[c], bc[c]);
      end
      acc_en = 1;
      @(posedge clk); #1;
    end
    acc_en = 0;
  endtask

  initial begin
    int ncol;
    acc_en = 0; shift = 0; act = '0; suma = '0; ctrl = '0;
    #12 rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 12; t++) begin
      foreach (expv[r, c]) expv[r][c] = 0;
      ncol = $urandom_range(2, 8);
      repeat ($urandom_range(1, 4)) run_group(ncol);
      for (int d = 0; d < COLS; d++) begin
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (out_col[r] !== acc_t'(expv[r][COLS-1-d])) begin
            failures++;
            if (failures < 10) $display("tile %0d drain %0d row %0d: %0d expected %0d",
                                        t, d, r, out_col[r], acc_t'(expv[r][COLS-1-d]));
          end
        end
        shift = 1;
        @(posedge clk); #1;
        shift = 0;
      end
      for (int r = 0; r < ROWS; r++) begin
        checks++; if (out_col[r] !== '0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
