// Cluster of four 4x4 systolic arrays for one sparse matrix product
// C = A x B, with A (transformed feature maps, RB x KB blocks) stored as
// 4x4 tiles in Z-Morton order and B (transformed, pruned weights, KB x JB
// blocks) stored in BCOO form.
//
// The four arrays form two halves (mm_half). For block rows ib and
// ib2 = ib + RB/2 the cluster first loads the circular FIFO of each half with
// the pairs {A(ib,kb), A(ib2,kb)}, kb = 0..KB-1 (two tile reads per cycle).
// Then, for each jb < JB/2, half 0 computes block column jb and half 1 block
// column jb + JB/2, so the four arrays hold C(ib,jb), C(ib2,jb),
// C(ib,jb+JB/2) and C(ib2,jb+JB/2) - the pattern C0, C8, C4, C12 of a 4x4 grid
// of blocks. Each half walks the weight blocks of its own column, so the two
// halves read the feature-map FIFO independently (the FIFO is "virtually
// split"); with a dense weight matrix both halves consume the same kb in step
// and the feature-map tiles are shared as in the dense cluster. When both
// halves are done the four result blocks are written to the C buffer at their
// Z-Morton addresses in 4 cycles (the spill), and the next block columns
// follow while the FIFO contents are reused.
//
// Accumulation runs over all inner blocks before a spill; the paper's
// example spills after two inner blocks, which would leave C incomplete.
// Interfaces: start/done handshake (done is a one-cycle pulse); nnzb is the
// number of stored weight blocks; the buffers are read asynchronously.
module mm_cluster
  import wino_pkg::*;
#(
  parameter int RB = 4,
  parameter int KB = 4,
  parameter int JB = 4,
  localparam int MB = $clog2((RB > KB ? (RB > JB ? RB : JB) : (KB > JB ? KB : JB)))
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] nnzb,
  output logic [2*MB-1:0] a_raddr [2],
  input  ptile_t      a_rdata [2],
  output logic [15:0] blk_raddr [4],
  input  bcoo_blk_t   blk_rdata [4],
  output logic [15:0] ent_raddr [2],
  input  bcoo_ent_t   ent_rdata [2],
  output logic        c_we,
  output logic [2*MB-1:0] c_waddr,
  output ptile_t      c_wdata,
  output logic        done,
  output logic [1:0]  issue_blk,
  output logic [1:0]  skip_blk
);

  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_RUN, C_WAIT, C_SPILL} cstate_t;
  cstate_t st;

  logic [MB-1:0] ib, kb, jb;
  logic [1:0]    sp;
  logic [1:0]    hdone, hdone_q;
  logic          fifo_load, hstart;
  logic [MB-1:0] jb_h [2];
  apair_t        pair;
  acc_t          acc [2][2][L][L];  // [half][array]
  logic [MB-1:0] c_row, c_col;

  // Feature-map tile reads for the FIFO load.
  morton_addr #(.BITS(MB)) u_ma0 (.row(ib), .col(kb), .phys(a_raddr[0]));
  morton_addr #(.BITS(MB)) u_ma1 (.row(ib + MB'(RB/2)), .col(kb), .phys(a_raddr[1]));
  assign pair.a0 = a_rdata[0];
  assign pair.a1 = a_rdata[1];
  assign fifo_load = (st == C_LOAD);
  assign hstart    = (st == C_RUN);
  assign jb_h[0]   = jb;
  assign jb_h[1]   = jb + MB'(JB/2);

  for (genvar h = 0; h < 2; h++) begin : g_half
    mm_half #(.MB(MB), .KB(KB)) u_half (
      .clk, .rst_n,
      .fifo_load,
      .fifo_din  (pair),
      .fifo_tag  (kb),
      .start     (hstart),
      .jb        (jb_h[h]),
      .nnzb,
      .blk_raddr (blk_raddr[2*h +: 2]),
      .blk_rdata (blk_rdata[2*h +: 2]),
      .ent_raddr (ent_raddr[h]),
      .ent_rdata (ent_rdata[h]),
      .acc0      (acc[h][0]),
      .acc1      (acc[h][1]),
      .done      (hdone[h]),
      .issue_blk (issue_blk[h]),
      .skip_blk  (skip_blk[h])
    );
  end

  // Spill: sp = {half, array}.
  always_comb begin
    c_row = sp[0] ? ib + MB'(RB/2) : ib;
    c_col = jb_h[sp[1]];
    c_we  = (st == C_SPILL);
    for (int i = 0; i < L; i++)
      for (int j = 0; j < L; j++)
        c_wdata[i][j] = acc[sp[1]][sp[0]][i][j];
  end
  morton_addr #(.BITS(MB)) u_mc (.row(c_row), .col(c_col), .phys(c_waddr));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st      <= C_IDLE;
      ib      <= '0;
      kb      <= '0;
      jb      <= '0;
      sp      <= '0;
      hdone_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          ib <= '0;
          kb <= '0;
          jb <= '0;
          st <= C_LOAD;
        end
        C_LOAD: begin
          kb <= kb + 1'b1;
          if (kb == MB'(KB-1)) begin
            kb <= '0;
            jb <= '0;
            st <= C_RUN;
          end
        end
        C_RUN: begin
          hdone_q <= '0;
          st      <= C_WAIT;
        end
        C_WAIT: begin
          hdone_q <= hdone_q | hdone;
          if ((hdone_q | hdone) == 2'b11) begin
            sp <= '0;
            st <= C_SPILL;
          end
        end
        C_SPILL: begin
          sp <= sp + 2'd1;
          if (sp == 2'd3) begin
            if (jb != MB'(JB/2 - 1)) begin
              jb <= jb + 1'b1;
              st <= C_RUN;
            end else if (ib != MB'(RB/2 - 1)) begin
              ib <= ib + 1'b1;
              kb <= '0;
              st <= C_LOAD;
            end else begin
              done <= 1'b1;
              st   <= C_IDLE;
            end
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
