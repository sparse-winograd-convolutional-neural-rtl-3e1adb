// Testbench for mm_systolic_array: issues NT random tile pairs back to back
// (one every 4 cycles), checks that the accumulators equal sum_t A_t x B_t
// exactly 7 cycles after the last issue cycle (and not one cycle earlier),
// then clears and repeats.
module tb_mm_systolic_array;
  import wino_pkg::*;
  localparam int NT = 6;
  logic clk = 0, rst_n = 0, clr;
  acc_t a_col [L];
  data_t b_row [L];
  acc_t acc [L][L];
  int checks = 0, failures = 0;

  mm_systolic_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [NT][4][4], b [NT][4][4], c [4][4];
    int early;
    clr = 0; a_col = '{default: '0}; b_row = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      c = '{default: 0};
      for (int t = 0; t < NT; t++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) begin
            a[t][i][j] = int'($urandom_range(0, 20000)) - 10000;
            b[t][i][j] = int'($urandom_range(0, 20000)) - 10000;
          end
      for (int t = 0; t < NT; t++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            for (int k = 0; k < 4; k++) c[i][j] += a[t][i][k] * b[t][k][j];
      for (int t = 0; t < NT; t++)
        for (int s = 0; s < 4; s++) begin
          for (int i = 0; i < 4; i++) begin
            a_col[i] = acc_t'(a[t][i][s]);
            b_row[i] = data_t'(b[t][s][i]);
          end
          @(negedge clk);
        end
      a_col = '{default: '0}; b_row = '{default: '0};
      // now one cycle after the last issue cycle
      repeat (5) @(negedge clk);
      early = 0;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) if (acc[i][j] !== acc_t'(c[i][j])) early++;
      checks++;
      if (early == 0) begin failures++; $display("result complete too early"); end
      @(negedge clk);
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (acc[i][j] !== acc_t'(c[i][j])) begin
            failures++;
            $display("C[%0d][%0d] = %0d, expected %0d", i, j, acc[i][j], c[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
