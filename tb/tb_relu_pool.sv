// Testbench for relu_pool: random signed 2x2 tiles under all four settings of
// relu_en and pool_en; checks the clamped values, the pooled maximum in
// z[0][0] and the one-cycle valid latency.
module tb_relu_pool;
  import wino_pkg::*;
  logic clk = 0, rst_n = 0, relu_en, pool_en, in_valid, out_valid;
  acc_t y [M][M], z [M][M];
  int checks = 0, failures = 0;

  relu_pool dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [2][2], e [2][2], mx;
    in_valid = 0; relu_en = 0; pool_en = 0; y = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) v[p][q] = int'($urandom_range(0, 200000)) - 100000;
      @(negedge clk);
      relu_en = it[0]; pool_en = it[1]; in_valid = 1;
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) y[p][q] = acc_t'(v[p][q]);
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) e[p][q] = (relu_en && v[p][q] < 0) ? 0 : v[p][q];
      mx = e[0][0];
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) if (e[p][q] > mx) mx = e[p][q];
      if (pool_en) e[0][0] = mx;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int p = 0; p < 2; p++)
        for (int q = 0; q < 2; q++) begin
          checks++;
          if (z[p][q] !== acc_t'(e[p][q])) begin failures++; $display("z[%0d][%0d] = %0d expected %0d", p, q, z[p][q], e[p][q]); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
