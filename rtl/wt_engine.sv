// Winograd input-transform engine: NUM_CHAINS chains of CHAIN_LEN transform
// units (wt_unit), 16 arrays by default.
//
// A chain transforms CHAIN_LEN vertically adjacent 4x4 tiles of one channel.
// Adjacent tiles overlap by r-1 = 2 rows. The chain is fed a strip of
// 2*CHAIN_LEN+2 rows, one column per cycle for 4 cycles. The first unit takes
// rows 0..3; unit n > 0 takes only its two new rows 2n+2, 2n+3 from the strip
// and receives its rows 2n, 2n+1 from the east edge of unit n-1, as the paper
// describes for data shared between tiles. Because those lanes cross 4 PEs
// and 2 lanes of skew, unit n runs 6 cycles after unit n-1; the engine delays
// the strip and the start for each unit accordingly (a derived detail). The
// strip and start are registered once on entry, so unit 0 starts one cycle
// after the engine.
// The chains work on different tile columns in parallel. The grouping of the
// 16 arrays into 4 chains of 4 is this design's choice; the paper gives the
// total and draws a chain of 4.
//
// Timing: start with ready high is cycle 0; strip_col carries strip column s
// in cycle s = 0..3 (strip_col[c][y] = row y of chain c). done pulses when the
// last unit finishes, 23 + 6*(CHAIN_LEN-1) cycles after start; v[c][n] is the
// transformed tile of unit n of chain c.
module wt_engine
  import wino_pkg::*;
#(
  parameter int CHAIN_LEN  = 4,
  parameter int NUM_CHAINS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  ready,
  input  data_t strip_col [NUM_CHAINS][2*CHAIN_LEN+2],
  output acc_t  v         [NUM_CHAINS][CHAIN_LEN][L][L],
  output logic  done
);

  localparam int NROW = 2*CHAIN_LEN + 2;
  localparam int DLY  = 6;                    // cycles between neighbours
  localparam int ND   = DLY*(CHAIN_LEN-1) + 1; // delay taps

  logic  go;
  logic  st_q    [ND];
  data_t strip_q [ND][NUM_CHAINS][NROW];
  logic  rdy     [NUM_CHAINS][CHAIN_LEN];
  logic  dn      [NUM_CHAINS][CHAIN_LEN];
  logic  all_rdy;

  always_comb begin
    all_rdy = 1'b1;
    for (int c = 0; c < NUM_CHAINS; c++)
      for (int n = 0; n < CHAIN_LEN; n++)
        all_rdy &= rdy[c][n];
  end

  // The engine accepts a new start only when every unit is idle and no start
  // is still travelling down the delay line.
  logic pending;
  always_comb begin
    pending = 1'b0;
    for (int d = 0; d < ND; d++) pending |= st_q[d];
  end
  assign ready = all_rdy && !pending;
  assign go    = start && ready;

  for (genvar d = 0; d < ND; d++) begin : g_dly
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        st_q[d] <= 1'b0;
        for (int c = 0; c < NUM_CHAINS; c++)
          for (int y = 0; y < NROW; y++) strip_q[d][c][y] <= '0;
      end else begin
        st_q[d]    <= (d == 0) ? go : st_q[d-1];
        strip_q[d] <= (d == 0) ? strip_col : strip_q[d-1];
      end
    end
  end

  for (genvar c = 0; c < NUM_CHAINS; c++) begin : g_chain
    for (genvar n = 0; n < CHAIN_LEN; n++) begin : g_unit
      data_t col [L];
      acc_t  fwd_i [R-1];
      acc_t  fwd_o [R-1];
      if (n == 0) begin : g_first
        for (genvar k = 0; k < R-1; k++) begin : g_z
          assign fwd_i[k] = '0;
        end
      end else begin : g_next
        assign fwd_i = g_unit[n-1].fwd_o;
      end
      for (genvar k = 0; k < L; k++) begin : g_lane
        assign col[k] = strip_q[DLY*n][c][2*n + k];
      end
      wt_unit #(.USE_FWD(n > 0)) u_unit (
        .clk, .rst_n,
        .start   (st_q[DLY*n]),
        .ready   (rdy[c][n]),
        .col_in  (col),
        .fwd_in  (fwd_i),
        .fwd_out (fwd_o),
        .v       (v[c][n]),
        .done    (dn[c][n])
      );
    end
  end

  assign done = dn[0][CHAIN_LEN-1];

endmodule
