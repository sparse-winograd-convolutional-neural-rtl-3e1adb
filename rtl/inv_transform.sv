// Inverse Winograd transform Y = A^T M A for F(2x2, 3x3).
//
// M is a 4x4 tile of summed element-wise products; Y is the 2x2 output tile.
// A^T = [1 1 1 0; 0 1 -1 -1], so each 1-D step is y0 = t0 + t1 + t2,
// y1 = t1 - t2 - t3, applied to the columns of M and then to the rows: only
// adders. The paper gives A^T but no circuit for this step; this is a plain
// adder network with one register stage (valid in, valid out one cycle later).
module inv_transform
  import wino_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t m_tile [L][L],
  output logic out_valid,
  output acc_t y [M][M]
);

  acc_t t [M][L];
  acc_t yc [M][M];

  always_comb begin
    for (int v = 0; v < L; v++) begin
      t[0][v] = m_tile[0][v] + m_tile[1][v] + m_tile[2][v];
      t[1][v] = m_tile[1][v] - m_tile[2][v] - m_tile[3][v];
    end
    for (int p = 0; p < M; p++) begin
      yc[p][0] = t[p][0] + t[p][1] + t[p][2];
      yc[p][1] = t[p][1] - t[p][2] - t[p][3];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int p = 0; p < M; p++)
        for (int q = 0; q < M; q++) y[p][q] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= yc;
    end
  end

endmodule
