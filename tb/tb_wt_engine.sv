// Testbench for wt_engine with 2 chains of 4 arrays: random 10-row strips,
// each unit's tile (rows 2n..2n+3) checked against B^T D B computed here
// with explicit integer matrices. Units 1..3 of each chain only see two rows
// of the strip, so their results depend on the forwarded overlap rows. Also
// checks that done arrives 23 + 6*3 = 41 cycles after start.
module tb_wt_engine;
  import wino_pkg::*;
  localparam int CL = 4, NC = 2, NR = 2*CL + 2;
  logic clk = 0, rst_n = 0;
  logic start, ready, done;
  data_t strip_col [NC][NR];
  acc_t v [NC][CL][L][L];
  int checks = 0, failures = 0;
  int bt [4][4] = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};

  wt_engine #(.CHAIN_LEN(CL), .NUM_CHAINS(NC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int img [NC][NR][4];
    int lat;
    start = 0;
    strip_col = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 8; it++) begin
      for (int c = 0; c < NC; c++)
        for (int y = 0; y < NR; y++)
          for (int x = 0; x < 4; x++) img[c][y][x] = int'($urandom_range(0, 4000)) - 2000;
      @(negedge clk);
      while (!ready) @(negedge clk);
      start = 1;
      for (int s = 0; s < 4; s++) begin
        for (int c = 0; c < NC; c++)
          for (int y = 0; y < NR; y++) strip_col[c][y] = data_t'(img[c][y][s]);
        @(negedge clk);
        start = 0;
      end
      strip_col = '{default: 16'sd77};
      lat = 4;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 23 + 6*(CL-1)) begin failures++; $display("latency %0d", lat); end
      for (int c = 0; c < NC; c++)
        for (int n = 0; n < CL; n++)
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++) begin
              int e;
              e = 0;
              for (int a = 0; a < 4; a++)
                for (int b = 0; b < 4; b++) e += bt[i][a] * img[c][2*n + a][b] * bt[j][b];
              checks++;
              if (v[c][n][i][j] !== acc_t'(e)) begin
                failures++;
                $display("chain %0d unit %0d V[%0d][%0d] = %0d, expected %0d", c, n, i, j, v[c][n][i][j], e);
              end
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
