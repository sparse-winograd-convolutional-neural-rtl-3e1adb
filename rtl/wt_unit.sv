// Winograd input transform of one l x l tile, V = B^T D B, on one transform
// array (wt_systolic_array).
//
// Instead of B^T D B the unit computes ((D^T B)^T) B in two passes through the
// same array, as the paper proposes:
//   pass 1: lane k carries row k of D (so D^T enters the array); the south
//           outputs give Y = D^T B, captured into a 4x4 register tile;
//   pass 2: the captured tile is fed back transposed (lane k carries row k of
//           Y, i.e. Y^T = B^T D enters), and the south outputs give
//           Y^T B = B^T D B.
// The capture tile is the corner-turn buffer between the passes; how the paper
// builds it ("shift-registers") is not described, so it is a plain register
// tile here. Pass 2 starts only after pass 1 is fully captured; passes of
// consecutive tiles are not overlapped. Both are this design's choices.
//
// Overlap forwarding (USE_FWD = 1): for all but the first array of a chain,
// lanes 0..R-2 of pass 1 are not read from col_in but taken, already skewed,
// from the east lanes L-R+1..L-1 of the previous array (fwd_in). The unit's
// own east lanes L-R+1..L-1 are offered on fwd_out.
//
// Timing: the cycle with start = 1 (and ready = 1) is cycle 0; col_in must
// carry tile column s (lane k = D[k][s]) in cycle s = 0..3. The input skew
// (lane k delayed k cycles) is inside the unit. Pass 1 outputs are captured in
// cycles 4..10, pass 2 is fed in cycles 11..14 and captured in cycles 15..21;
// done pulses in cycle 22 with v valid until the next tile ends.
// ready is low while busy and during the first cycle after reset, when B is
// loaded into the array.
module wt_unit
  import wino_pkg::*;
#(
  parameter bit USE_FWD = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  ready,
  input  data_t col_in  [L],
  input  acc_t  fwd_in  [R-1],
  output acc_t  fwd_out [R-1],
  output acc_t  v       [L][L],
  output logic  done
);

  localparam int P2     = 11;          // first cycle of pass 2
  localparam int LASTC  = P2 + 2*L + 2; // last capture cycle (21)

  logic       b_loaded, busy;
  logic [4:0] t_q, tc;
  logic       go;

  coef_t b_tab  [L][L];
  acc_t  lane   [L];   // unskewed lane input this cycle
  acc_t  skew_q [L][L]; // skew_q[k][0..k-1] delay line for lane k
  acc_t  west   [L];
  acc_t  east   [L];
  acc_t  south  [L];
  acc_t  ybuf   [L][L];
  acc_t  vbuf   [L][L];

  always_comb
    for (int k = 0; k < L; k++)
      for (int j = 0; j < L; j++)
        b_tab[k][j] = b_coef(2'(k), 2'(j));

  assign ready = b_loaded && !busy;
  assign go    = start && ready;
  assign tc    = go ? 5'd0 : t_q;

  // Lane sources: pass 1 from col_in, pass 2 from the captured tile.
  always_comb begin
    for (int k = 0; k < L; k++) begin
      lane[k] = '0;
      if ((go || busy) && tc < 5'(L))
        lane[k] = acc_t'(col_in[k]);
      else if (busy && tc >= 5'(P2) && tc < 5'(P2 + L))
        lane[k] = ybuf[k][2'(tc - 5'(P2))];
    end
  end

  // Skew: lane k reaches the array k cycles late.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++)
        for (int d = 0; d < L; d++) skew_q[k][d] <= '0;
    end else begin
      for (int k = 1; k < L; k++) begin
        skew_q[k][0] <= lane[k];
        for (int d = 1; d < k; d++) skew_q[k][d] <= skew_q[k][d-1];
      end
    end
  end

  always_comb begin
    west[0] = lane[0];
    for (int k = 1; k < L; k++) west[k] = skew_q[k][k-1];
    if (USE_FWD && (go || busy) && tc < 5'(P2))
      for (int k = 0; k < R-1; k++) west[k] = fwd_in[k];
  end

  wt_systolic_array u_arr (
    .clk, .rst_n,
    .b_load  (!b_loaded),
    .b_mat   (b_tab),
    .d_west  (west),
    .d_east  (east),
    .c_south (south)
  );

  for (genvar k = 0; k < R-1; k++) begin : g_fwd
    assign fwd_out[k] = east[L-R+1+k];
  end

  // Control and output capture.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_loaded <= 1'b0;
      busy     <= 1'b0;
      t_q      <= '0;
      done     <= 1'b0;
      for (int i = 0; i < L; i++)
        for (int j = 0; j < L; j++) begin
          ybuf[i][j] <= '0;
          vbuf[i][j] <= '0;
        end
    end else begin
      b_loaded <= 1'b1;
      done     <= 1'b0;
      if (go || busy) begin
        for (int j = 0; j < L; j++) begin
          // pass 1: Y[s][j] appears at cycle s + j + L
          if (tc >= 5'(j + L) && tc <= 5'(j + 2*L - 1))
            ybuf[2'(tc - 5'(j + L))][j] <= south[j];
          // pass 2: V[s][j] appears at cycle P2 + s + j + L
          if (tc >= 5'(P2 + j + L) && tc <= 5'(P2 + j + 2*L - 1))
            vbuf[2'(tc - 5'(P2 + j + L))][j] <= south[j];
        end
        if (tc == 5'(LASTC)) begin
          busy <= 1'b0;
          t_q  <= '0;
          done <= 1'b1;
        end else begin
          busy <= 1'b1;
          t_q  <= tc + 5'd1;
        end
      end
    end
  end

  assign v = vbuf;

endmodule
