// Testbench for inv_transform: random 4x4 tiles M, reference A^T M A with
// A^T = [1 1 1 0; 0 1 -1 -1] as integer matrices; checks the one-cycle
// latency of out_valid and the values.
module tb_inv_transform;
  import wino_pkg::*;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  acc_t m_tile [L][L];
  acc_t y [M][M];
  int at [2][4] = '{'{1, 1, 1, 0}, '{0, 1, -1, -1}};
  int checks = 0, failures = 0;

  inv_transform dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mt [4][4], e [2][2];
    in_valid = 0; m_tile = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) mt[i][j] = int'($urandom_range(0, 2000000)) - 1000000;
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) begin
          e[p][q] = 0;
          for (int a = 0; a < 4; a++)
            for (int b = 0; b < 4; b++) e[p][q] += at[p][a] * mt[a][b] * at[q][b];
        end
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) m_tile[i][j] = acc_t'(mt[i][j]);
      @(negedge clk);
      in_valid = 0;
      m_tile = '{default: '0};
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) begin
          checks++;
          if (y[p][q] !== acc_t'(e[p][q])) begin failures++; $display("Y[%0d][%0d] = %0d expected %0d", p, q, y[p][q], e[p][q]); end
        end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
