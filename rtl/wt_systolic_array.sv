// l x l systolic array of transform PEs (wt_pe) with the transform matrix B
// held stationary: PE(k,j) holds B[k][j].
//
// Lane k of d_west feeds row k; data move one PE east per cycle and leave
// through d_east, from where the paper forwards the last r-1 lanes to the
// neighbouring array. Partial sums start at zero at the north edge (the zero
// matrices C and C') and move one PE south per cycle. With lane k delayed by k
// cycles (the caller skews the input), the value X[s][k] entering lane k at
// cycle s+k produces (X*B)[s][j] on c_south[j] at cycle s+j+L.
// B is written into all R_B registers in the cycle b_load is high.
module wt_systolic_array
  import wino_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  b_load,
  input  coef_t b_mat   [L][L],
  input  acc_t  d_west  [L],
  output acc_t  d_east  [L],
  output acc_t  c_south [L]
);

  acc_t dh [L][L+1];  // horizontal data, dh[k][0] = west edge
  acc_t cv [L+1][L];  // vertical sums,  cv[0][j]  = north edge

  for (genvar k = 0; k < L; k++) begin : g_row
    assign dh[k][0] = d_west[k];
    assign d_east[k] = dh[k][L];
    for (genvar j = 0; j < L; j++) begin : g_col
      wt_pe u_pe (
        .clk, .rst_n,
        .rb_load (b_load),
        .rb_in   (b_mat[k][j]),
        .d_in    (dh[k][j]),
        .c_in    (cv[k][j]),
        .d_out   (dh[k][j+1]),
        .c_out   (cv[k+1][j])
      );
    end
  end

  for (genvar j = 0; j < L; j++) begin : g_edge
    assign cv[0][j]   = '0;
    assign c_south[j] = cv[L][j];
  end

endmodule
