// 4x4 output-stationary systolic array for C += A x B on 4x4 tiles.
//
// In issue cycle s (0..3) the caller presents column s of the A tile
// (a_col[i] = A[i][s]) and row s of the B tile (b_row[j] = B[s][j]). Row i of
// A is delayed i cycles and column j of B j cycles inside the array, so
// A[i][s] and B[s][j] meet in PE(i,j) at cycle s+i+j. Tiles can be issued
// back to back (one every 4 cycles), each adding its product to the
// accumulators; zeros are presented when idle. acc[i][j] includes a tile
// issued in cycles c..c+3 from cycle c+10 on (7 cycles after the last issue
// cycle). clr zeroes all accumulators. The results are read in parallel from
// acc ("spilled"); the spill path is this design's choice.
module mm_systolic_array
  import wino_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  acc_t  a_col [L],
  input  data_t b_row [L],
  output acc_t  acc   [L][L]
);

  acc_t  ah [L][L+1];
  data_t bv [L+1][L];
  acc_t  a_sk [L][L];
  data_t b_sk [L][L];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < L; i++)
        for (int d = 0; d < L; d++) begin
          a_sk[i][d] <= '0;
          b_sk[i][d] <= '0;
        end
    end else begin
      for (int i = 1; i < L; i++) begin
        a_sk[i][0] <= a_col[i];
        b_sk[i][0] <= b_row[i];
        for (int d = 1; d < i; d++) begin
          a_sk[i][d] <= a_sk[i][d-1];
          b_sk[i][d] <= b_sk[i][d-1];
        end
      end
    end
  end

  assign ah[0][0] = a_col[0];
  assign bv[0][0] = b_row[0];
  for (genvar i = 1; i < L; i++) begin : g_sk
    assign ah[i][0] = a_sk[i][i-1];
    assign bv[0][i] = b_sk[i][i-1];
  end

  for (genvar i = 0; i < L; i++) begin : g_row
    for (genvar j = 0; j < L; j++) begin : g_col
      mm_pe u_pe (
        .clk, .rst_n, .clr,
        .a_in  (ah[i][j]),
        .b_in  (bv[i][j]),
        .a_out (ah[i][j+1]),
        .b_out (bv[i+1][j]),
        .acc   (acc[i][j])
      );
    end
  end

endmodule
