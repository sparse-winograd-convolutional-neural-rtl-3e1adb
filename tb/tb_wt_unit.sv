// Testbench for wt_unit (first array of a chain, no forwarded lanes): random
// 4x4 tiles D, reference V = B^T D B built from the 1-D F(2,3) input
// transform j0 = d0 - d2, j1 = d1 + d2, j2 = d2 - d1, j3 = d1 - d3 applied to
// columns and then rows. Checks the result and that done comes 22 cycles
// after start.
module tb_wt_unit;
  import wino_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, ready, done;
  data_t col_in [L];
  acc_t fwd_in [R-1], fwd_out [R-1];
  acc_t v [L][L];
  int checks = 0, failures = 0;

  wt_unit #(.USE_FWD(1'b0)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void bt1(input int d [4], output int o [4]);
    o[0] = d[0] - d[2]; o[1] = d[1] + d[2]; o[2] = d[2] - d[1]; o[3] = d[1] - d[3];
  endfunction

  initial begin
    int d [4][4], t1 [4][4], ve [4][4], col [4], o [4];
    int lat;
    start = 0; fwd_in = '{default: '0};
    for (int k = 0; k < L; k++) col_in[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) d[i][j] = (n == 0) ? 32767 - 2*j : int'($urandom_range(0, 65535)) - 32768;
      // columns: t1 = B^T D
      for (int j = 0; j < 4; j++) begin
        for (int i = 0; i < 4; i++) col[i] = d[i][j];
        bt1(col, o);
        for (int i = 0; i < 4; i++) t1[i][j] = o[i];
      end
      // rows: V = t1 B
      for (int i = 0; i < 4; i++) begin
        bt1(t1[i], o);
        ve[i] = o;
      end
      @(negedge clk);
      while (!ready) @(negedge clk);
      start = 1;
      for (int s = 0; s < 4; s++) begin
        for (int k = 0; k < 4; k++) col_in[k] = data_t'(d[k][s]);
        @(negedge clk);
        start = 0;
      end
      for (int k = 0; k < L; k++) col_in[k] = data_t'($urandom);  // junk after the tile
      lat = 4;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 22) begin failures++; $display("latency %0d, expected 22", lat); end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (v[i][j] !== acc_t'(ve[i][j])) begin
            failures++;
            $display("tile %0d V[%0d][%0d] = %0d, expected %0d", n, i, j, v[i][j], ve[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
