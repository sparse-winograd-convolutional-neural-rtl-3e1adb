// Testbench for wt_systolic_array: loads B, streams skewed random 4x4 blocks X
// (lane k delayed k cycles) through the west edge and checks that (X*B)[s][j]
// appears on c_south[j] at cycle s+j+4 and that each lane leaves the east
// edge 4 cycles after it entered. X*B is computed here from B written out
// as integers.
module tb_wt_systolic_array;
  import wino_pkg::*;
  localparam int NT = 20;  // blocks streamed back to back
  logic clk = 0, rst_n = 0;
  logic b_load;
  coef_t b_mat [L][L];
  acc_t d_west [L], d_east [L], c_south [L];
  int checks = 0, failures = 0;
  int bm [4][4] = '{'{1, 0, 0, 0}, '{0, 1, -1, 1}, '{-1, 1, 1, 0}, '{0, 0, 0, -1}};
  int x [NT*4][4];   // rows of X, row s of block b = x[4b+s]
  int cyc;

  wt_systolic_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xin(int s, int k);
    return (s >= 0 && s < NT*4) ? x[s][k] : 0;
  endfunction

  initial begin
    for (int s = 0; s < NT*4; s++)
      for (int k = 0; k < 4; k++) x[s][k] = int'($urandom_range(0, 2000)) - 1000;
    for (int k = 0; k < 4; k++)
      for (int j = 0; j < 4; j++)
        b_mat[k][j] = bm[k][j] > 0 ? CO_POS : bm[k][j] < 0 ? CO_NEG : CO_ZERO;
    b_load = 0;
    for (int k = 0; k < 4; k++) d_west[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); b_load = 1;
    @(negedge clk); b_load = 0;
    // drive cycle 'cyc' at negedge; lane k carries row (cyc-k)
    for (cyc = 0; cyc < NT*4 + 12; cyc++) begin
      for (int k = 0; k < 4; k++) d_west[k] = acc_t'(xin(cyc - k, k));
      @(posedge clk); #1;
      // after this edge, outputs reflect inputs up to cycle cyc
      for (int j = 0; j < 4; j++) begin
        int s, e;
        s = cyc + 1 - j - 4;
        if (s >= 0 && s < NT*4) begin
          e = 0;
          for (int k = 0; k < 4; k++) e += xin(s, k) * bm[k][j];
          checks++;
          if (c_south[j] !== acc_t'(e)) begin
            failures++;
            $display("Y[%0d][%0d] = %0d, expected %0d", s, j, c_south[j], e);
          end
        end
      end
      for (int k = 0; k < 4; k++) begin
        if (cyc - 3 - k >= 0 && cyc - 3 - k < NT*4) begin
          checks++;
          if (d_east[k] !== acc_t'(xin(cyc - 3 - k, k))) begin
            failures++;
            $display("east lane %0d wrong at cycle %0d", k, cyc);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
