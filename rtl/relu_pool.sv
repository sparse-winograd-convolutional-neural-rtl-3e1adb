// Comparators at the output buffer: ReLU and 2x2 max pooling.
//
// Takes a 2x2 output tile. With relu_en each value below zero becomes zero.
// With pool_en, z[0][0] is the maximum of the four (after ReLU if enabled),
// which is VGG's 2x2 stride-2 pooling window when the window coincides with
// the m = 2 output tile (this alignment is this design's choice); the other
// outputs then repeat the values without pooling. One register stage.
module relu_pool
  import wino_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic relu_en,
  input  logic pool_en,
  input  logic in_valid,
  input  acc_t y [M][M],
  output logic out_valid,
  output acc_t z [M][M]
);

  acc_t r [M][M];
  acc_t mx01, mx23, mx;

  always_comb begin
    for (int p = 0; p < M; p++)
      for (int q = 0; q < M; q++)
        r[p][q] = (relu_en && y[p][q] < 0) ? '0 : y[p][q];
    mx01 = (r[0][0] > r[0][1]) ? r[0][0] : r[0][1];
    mx23 = (r[1][0] > r[1][1]) ? r[1][0] : r[1][1];
    mx   = (mx01 > mx23) ? mx01 : mx23;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int p = 0; p < M; p++)
        for (int q = 0; q < M; q++) z[p][q] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        z <= r;
        if (pool_en) z[0][0] <= mx;
      end
    end
  end

endmodule
