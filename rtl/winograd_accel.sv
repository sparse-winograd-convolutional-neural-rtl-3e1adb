// Sparse Winograd convolution accelerator, one convolution layer
// F(2x2, 3x3): C input channels of H x W = (2*TH+2) x (2*TW+2) values, K
// filters, output (H-2) x (W-2) per filter (no padding).
//
// Data flow (each phase runs to completion before the next starts):
//   1. TRANSFORM  For every channel and every group of tiles the transform
//      engine (16 two-pass adder arrays) computes V = B^T D B for
//      NUM_CHAINS x CHAIN_LEN overlapping 4x4 tiles at once.
//   2. SCATTER    Each V tile is spread over the 16 Winograd matrices: element
//      (u,v) of the tile of tile index b and channel c becomes entry (b,c) of
//      matrix e = 4u+v. One tile per cycle, one element per matrix buffer.
//   3. MULTIPLY   The 16 independent products M_e = V_e x U_e (tiles x channels
//      times channels x filters) run on NUM_CLUSTERS = 8 clusters of four
//      4x4 MAC arrays, in 16/8 = 2 iterations. V_e is stored as 4x4 tiles in
//      Z-Morton order, the pruned transformed weights U_e in BCOO form.
//   4. INVERSE    For every tile b and filter k the 16 values M_e(b,k) form a
//      4x4 tile; Y = A^T M A gives the 2x2 outputs, ReLU and 2x2 max pooling
//      are applied by comparators, and the result is written to the output
//      buffer (one word of 4 values per (k, b), at address k*TH*TW + b).
// The weights are transformed and pruned off-chip and loaded by the host,
// which also loads the input maps and reads the results; those host ports
// stand where the external memory would connect.
//
// Tile index b = ty*TW + tx; with pool_en the pooled value of tile b is
// element 0 of its output word.
// Follows the paper: the unit counts (16 transform arrays, 8 clusters of 4
// arrays, l = 4), the two-pass transform with overlap forwarding, the
// cluster organisation, Z-Morton tiles, BCOO weights. This design's own
// choices: phases not overlapped, buffer organisation and sizes, compile-time
// layer shape, host load/read ports, integer arithmetic.
//
// Constraints: TH a multiple of CHAIN_LEN, TW a multiple of NUM_CHAINS, and
// each of TH*TW/4, C/4 and K/4 a power of two of at least 2.
// stat_issued / stat_skipped count the weight blocks multiplied and the
// block-list entries passed over by the clusters since reset.
module winograd_accel
  import wino_pkg::*;
#(
  parameter int C            = 16,
  parameter int K            = 16,
  parameter int TH           = 4,
  parameter int TW           = 4,
  parameter int CHAIN_LEN    = 4,
  parameter int NUM_CHAINS   = 4,
  parameter int NUM_CLUSTERS = 8,
  localparam int H    = 2*TH + 2,
  localparam int W    = 2*TW + 2,
  localparam int NB   = TH*TW,          // tiles per channel = rows of V_e
  localparam int RB   = NB/4,
  localparam int KB   = C/4,
  localparam int JB   = K/4,
  localparam int MB   = $clog2((RB > KB ? (RB > JB ? RB : JB) : (KB > JB ? KB : JB))),
  localparam int TD   = 1 << (2*MB),    // tiles per matrix buffer
  localparam int NMAT = L*L,
  localparam int NBLK = KB*JB,          // max stored weight blocks per matrix
  localparam int NENT = NBLK*L*L,       // max stored nonzeros per matrix
  localparam int CBW  = (C > 1) ? $clog2(C) : 1,
  localparam int OD   = K*NB,
  localparam int OAW  = $clog2(OD)
) (
  input  logic           clk,
  input  logic           rst_n,
  // layer control
  input  logic           start,
  input  logic           relu_en,
  input  logic           pool_en,
  output logic           busy,
  output logic           done,
  // host: input feature maps
  input  logic           fm_we,
  input  logic [CBW-1:0] fm_c,
  input  logic [$clog2(H)-1:0] fm_y,
  input  logic [$clog2(W)-1:0] fm_x,
  input  data_t          fm_data,
  // host: BCOO weights of matrix w_mat
  input  logic [3:0]     w_mat,
  input  logic           w_blk_we,    // BN/BI record w_addr
  input  logic           w_ent_we,    // A_I/A_J/A_N entry w_addr
  input  logic           w_nnzb_we,   // number of stored blocks
  input  logic [15:0]    w_addr,      // block or entry index
  input  bcoo_blk_t      w_blk,
  input  bcoo_ent_t      w_ent,
  input  logic [15:0]    w_nnzb,
  // host: results
  input  logic [OAW-1:0] out_raddr,
  output acc_t           out_rdata [M][M],
  // statistics
  output logic [31:0]    stat_issued,
  output logic [31:0]    stat_skipped
);

  localparam int NIT = NMAT / NUM_CLUSTERS;  // cluster iterations

  typedef enum logic [2:0] {S_IDLE, S_WT_FEED, S_WT_WAIT, S_SCATTER, S_MM_START, S_MM_WAIT,
                            S_INV, S_INV_DRAIN} state_t;
  state_t st;

  // ---------------------------------------------------------------- buffers
  data_t strip [NUM_CHAINS][2*CHAIN_LEN+2];
  logic [CBW-1:0] c_q;
  logic [7:0]     tyg, txg;
  logic [1:0]     s_q;

  fm_buffer #(.C(C), .H(H), .W(W), .CHAIN_LEN(CHAIN_LEN), .NUM_CHAINS(NUM_CHAINS)) u_fm (
    .clk, .we(fm_we), .wc(fm_c), .wy(fm_y), .wx(fm_x), .wdata(fm_data),
    .rc(c_q), .tyg, .txg, .s(s_q), .strip
  );

  // ------------------------------------------------------ transform engine
  logic  wt_start, wt_ready, wt_done;
  acc_t  vt [NUM_CHAINS][CHAIN_LEN][L][L];

  wt_engine #(.CHAIN_LEN(CHAIN_LEN), .NUM_CHAINS(NUM_CHAINS)) u_wt (
    .clk, .rst_n, .start(wt_start), .ready(wt_ready), .strip_col(strip), .v(vt), .done(wt_done)
  );

  // Scatter: unit index su -> (chain, position), tile b, Z-Morton address.
  localparam int NU = NUM_CHAINS*CHAIN_LEN;
  logic [7:0]      su;
  int              sc_ch, sc_n, sc_ty, sc_tx, sc_b;
  logic [2*MB-1:0] sc_addr;
  always_comb begin
    sc_ch = int'(su) / CHAIN_LEN;
    sc_n  = int'(su) % CHAIN_LEN;
    sc_ty = int'(tyg)*CHAIN_LEN + sc_n;
    sc_tx = int'(txg)*NUM_CHAINS + sc_ch;
    sc_b  = sc_ty*TW + sc_tx;
  end
  morton_addr #(.BITS(MB)) u_sc_ma (.row(MB'(sc_b / L)), .col(MB'(int'(c_q) / L)), .phys(sc_addr));

  // -------------------------------------------- V, U and M buffers per matrix
  logic [2*MB-1:0] cl_a_raddr  [NUM_CLUSTERS][2];
  logic [15:0]     cl_blk_raddr[NUM_CLUSTERS][4];
  logic [15:0]     cl_ent_raddr[NUM_CLUSTERS][2];
  logic            cl_c_we     [NUM_CLUSTERS];
  logic [2*MB-1:0] cl_c_waddr  [NUM_CLUSTERS];
  ptile_t          cl_c_wdata  [NUM_CLUSTERS];
  logic            cl_done     [NUM_CLUSTERS];
  logic [1:0]      cl_issue    [NUM_CLUSTERS];
  logic [1:0]      cl_skip     [NUM_CLUSTERS];
  logic [15:0]     nnzb        [NMAT];
  logic [$clog2(NIT > 1 ? NIT : 2)-1:0] git;

  ptile_t          v_rdata [NMAT][2];
  bcoo_blk_t       b_rdata [NMAT][4];
  bcoo_ent_t       e_rdata [NMAT][2];
  ptile_t          m_rdata [NMAT][1];
  logic [2*MB-1:0] inv_addr;
  logic [1:0]      inv_i, inv_j;

  for (genvar e = 0; e < NMAT; e++) begin : g_mat
    localparam int Q = e % NUM_CLUSTERS;
    localparam int G = e / NUM_CLUSTERS;
    logic [L*L-1:0]  v_we;
    ptile_t          v_wd;
    logic [2*MB-1:0] m_ra [1];
    logic [$clog2(NBLK+1)-1:0] b_ra [4];
    logic [$clog2(NENT)-1:0]   e_ra [2];
    ptile_t          m_wd;
    logic [L*L-1:0][AW-1:0] v_raw [2];
    logic [L*L-1:0][AW-1:0] m_raw [1];
    logic [0:0][$bits(bcoo_blk_t)-1:0] b_raw [4];
    logic [0:0][$bits(bcoo_ent_t)-1:0] e_raw [2];
    for (genvar p = 0; p < 2; p++) begin : g_cv2
      assign v_rdata[e][p] = ptile_t'(v_raw[p]);
      assign e_rdata[e][p] = bcoo_ent_t'(e_raw[p]);
    end
    for (genvar p = 0; p < 4; p++) begin : g_cv4
      assign b_rdata[e][p] = bcoo_blk_t'(b_raw[p]);
    end
    assign m_rdata[e][0] = ptile_t'(m_raw[0]);

    // scatter write: element (b%4, c%4) of the tile
    always_comb begin
      v_we = '0;
      v_wd = '0;
      if (st == S_SCATTER) begin
        v_we[(sc_b % L)*L + int'(c_q) % L] = 1'b1;
        v_wd[sc_b % L][int'(c_q) % L] = vt[sc_ch][sc_n][e / L][e % L];
      end
    end

    ram_nr1w #(.DEPTH(TD), .NE(L*L), .EW(AW), .NR(2)) u_vbuf (
      .clk, .we(v_we), .waddr(sc_addr), .wdata(v_wd),
      .raddr(cl_a_raddr[Q]), .rdata(v_raw)
    );

    for (genvar p = 0; p < 4; p++) begin : g_bra
      assign b_ra[p] = $bits(b_ra[p])'(cl_blk_raddr[Q][p] > 16'(NBLK) ? 16'(NBLK) : cl_blk_raddr[Q][p]);
    end
    for (genvar p = 0; p < 2; p++) begin : g_era
      assign e_ra[p] = $bits(e_ra[p])'(cl_ent_raddr[Q][p]);
    end

    ram_nr1w #(.DEPTH(NBLK+1), .NE(1), .EW($bits(bcoo_blk_t)), .NR(4)) u_bbuf (
      .clk, .we(w_blk_we && w_mat == 4'(e)), .waddr($bits(b_ra[0])'(w_addr)), .wdata(w_blk),
      .raddr(b_ra), .rdata(b_raw)
    );
    ram_nr1w #(.DEPTH(NENT), .NE(1), .EW($bits(bcoo_ent_t)), .NR(2)) u_ebuf (
      .clk, .we(w_ent_we && w_mat == 4'(e)), .waddr($bits(e_ra[0])'(w_addr)), .wdata(w_ent),
      .raddr(e_ra), .rdata(e_raw)
    );

    always_ff @(posedge clk)
      if (!rst_n) nnzb[e] <= '0;
      else if (w_nnzb_we && w_mat == 4'(e)) nnzb[e] <= w_nnzb;

    assign m_ra[0] = inv_addr;
    assign m_wd    = cl_c_wdata[Q];
    ram_nr1w #(.DEPTH(TD), .NE(L*L), .EW(AW), .NR(1)) u_mbuf (
      .clk, .we({(L*L){cl_c_we[Q] && int'(git) == G}}), .waddr(cl_c_waddr[Q]), .wdata(m_wd),
      .raddr(m_ra), .rdata(m_raw)
    );
  end

  // ---------------------------------------------------------------- clusters
  logic cl_start;
  logic [NUM_CLUSTERS-1:0] cl_done_q;

  for (genvar q = 0; q < NUM_CLUSTERS; q++) begin : g_cl
    ptile_t    a_rd [2];
    bcoo_blk_t b_rd [4];
    bcoo_ent_t e_rd [2];
    always_comb begin
      a_rd = v_rdata[int'(git)*NUM_CLUSTERS + q];
      b_rd = b_rdata[int'(git)*NUM_CLUSTERS + q];
      e_rd = e_rdata[int'(git)*NUM_CLUSTERS + q];
    end
    mm_cluster #(.RB(RB), .KB(KB), .JB(JB)) u_cl (
      .clk, .rst_n,
      .start     (cl_start),
      .nnzb      (nnzb[int'(git)*NUM_CLUSTERS + q]),
      .a_raddr   (cl_a_raddr[q]),
      .a_rdata   (a_rd),
      .blk_raddr (cl_blk_raddr[q]),
      .blk_rdata (b_rd),
      .ent_raddr (cl_ent_raddr[q]),
      .ent_rdata (e_rd),
      .c_we      (cl_c_we[q]),
      .c_waddr   (cl_c_waddr[q]),
      .c_wdata   (cl_c_wdata[q]),
      .done      (cl_done[q]),
      .issue_blk (cl_issue[q]),
      .skip_blk  (cl_skip[q])
    );
  end

  // --------------------------------------------------- inverse and output
  logic [$clog2(NB)-1:0] ib_q;   // tile b
  logic [$clog2(K)-1:0]  ik_q;   // filter k
  acc_t  m_tile [L][L];
  acc_t  y [M][M], z [M][M];
  logic  inv_valid, y_valid, z_valid;
  logic [OAW-1:0] oaddr_d1, oaddr_d2;

  morton_addr #(.BITS(MB)) u_inv_ma (.row(MB'(int'(ib_q) / L)), .col(MB'(int'(ik_q) / L)),
                                     .phys(inv_addr));
  assign inv_i = 2'(int'(ib_q) % L);
  assign inv_j = 2'(int'(ik_q) % L);
  assign inv_valid = (st == S_INV);

  always_comb
    for (int u = 0; u < L; u++)
      for (int v = 0; v < L; v++)
        m_tile[u][v] = acc_t'(m_rdata[u*L + v][0][inv_i][inv_j]);

  inv_transform u_inv (.clk, .rst_n, .in_valid(inv_valid), .m_tile, .out_valid(y_valid), .y);
  relu_pool u_rp (.clk, .rst_n, .relu_en, .pool_en, .in_valid(y_valid), .y, .out_valid(z_valid), .z);

  logic [M*M-1:0][AW-1:0] o_wd;
  logic [OAW-1:0]         o_ra [1];
  logic [M*M-1:0][AW-1:0] o_rd [1];
  always_comb
    for (int p = 0; p < M; p++)
      for (int q = 0; q < M; q++) o_wd[p*M + q] = z[p][q];
  assign o_ra[0] = out_raddr;

  ram_nr1w #(.DEPTH(OD), .NE(M*M), .EW(AW), .NR(1)) u_obuf (
    .clk, .we({(M*M){z_valid}}), .waddr(oaddr_d2), .wdata(o_wd), .raddr(o_ra), .rdata(o_rd)
  );
  always_comb
    for (int p = 0; p < M; p++)
      for (int q = 0; q < M; q++) out_rdata[p][q] = acc_t'(o_rd[0][p*M + q]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stat_issued  <= '0;
      stat_skipped <= '0;
    end else begin
      int ni, ns;
      ni = 0;
      ns = 0;
      for (int q = 0; q < NUM_CLUSTERS; q++) begin
        ni += $countones(cl_issue[q]);
        ns += $countones(cl_skip[q]);
      end
      stat_issued  <= stat_issued + 32'(ni);
      stat_skipped <= stat_skipped + 32'(ns);
    end
  end

  // ------------------------------------------------------------- sequencer
  assign wt_start = (st == S_WT_FEED) && (s_q == 2'd0) && wt_ready;
  assign cl_start = (st == S_MM_START);
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      c_q       <= '0;
      tyg       <= '0;
      txg       <= '0;
      s_q       <= '0;
      su        <= '0;
      git       <= '0;
      cl_done_q <= '0;
      ib_q      <= '0;
      ik_q      <= '0;
      oaddr_d1  <= '0;
      oaddr_d2  <= '0;
      done      <= 1'b0;
    end else begin
      done     <= 1'b0;
      oaddr_d1 <= OAW'(int'(ik_q)*NB + int'(ib_q));
      oaddr_d2 <= oaddr_d1;
      unique case (st)
        S_IDLE: if (start) begin
          c_q <= '0; tyg <= '0; txg <= '0; s_q <= '0;
          st  <= S_WT_FEED;
        end
        S_WT_FEED: begin
          // strip column s_q is on the engine input in this cycle
          if (s_q != 2'd0 || wt_ready) begin
            s_q <= s_q + 2'd1;
            if (s_q == 2'd3) st <= S_WT_WAIT;
          end
        end
        S_WT_WAIT: if (wt_done) begin
          su <= '0;
          st <= S_SCATTER;
        end
        S_SCATTER: begin
          su <= su + 8'd1;
          if (int'(su) == NU-1) begin
            st <= S_WT_FEED;
            if (int'(txg) != TW/NUM_CHAINS - 1) txg <= txg + 8'd1;
            else begin
              txg <= '0;
              if (int'(tyg) != TH/CHAIN_LEN - 1) tyg <= tyg + 8'd1;
              else begin
                tyg <= '0;
                if (int'(c_q) != C-1) c_q <= c_q + 1'b1;
                else begin
                  git <= '0;
                  st  <= S_MM_START;
                end
              end
            end
          end
        end
        S_MM_START: begin
          cl_done_q <= '0;
          st        <= S_MM_WAIT;
        end
        S_MM_WAIT: begin
          for (int q = 0; q < NUM_CLUSTERS; q++)
            if (cl_done[q]) cl_done_q[q] <= 1'b1;
          if (&cl_done_q) begin
            if (int'(git) != NIT-1) begin
              git <= git + 1'b1;
              st  <= S_MM_START;
            end else begin
              ib_q <= '0;
              ik_q <= '0;
              st   <= S_INV;
            end
          end
        end
        S_INV: begin
          if (int'(ik_q) != K-1) ik_q <= ik_q + 1'b1;
          else begin
            ik_q <= '0;
            if (int'(ib_q) != NB-1) ib_q <= ib_q + 1'b1;
            else st <= S_INV_DRAIN;
          end
        end
        S_INV_DRAIN: if (!y_valid && !z_valid) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
