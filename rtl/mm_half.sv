// One half of a matrix-multiplication cluster: two systolic arrays sharing a
// decompressed weight block, a circular FIFO of feature-map tiles and a
// BCOO decompressor.
//
// The half computes two output blocks of the same block column jb:
//   C(ib, jb) += A(ib, kb) x B(kb, jb)  (array 0)
//   C(ib2, jb) += A(ib2, kb) x B(kb, jb) (array 1)
// over every nonzero weight block B(kb, jb). It walks the BCOO block list in
// stored (Z-Morton) order, decoding each block number into (kb, column);
// blocks of other columns are skipped at one cycle each. For a matching
// block it starts the decompressor and rotates the FIFO until the entry with
// tag kb (holding A(ib,kb) and A(ib2,kb)) is at the head; it then issues the
// tiles to both arrays in 4 cycles. Zero blocks are never stored, so their
// products are never computed: this is where the sparse weights save time.
// The cluster loads the FIFO beforehand through fifo_load.
//
// Timing: start (in idle) clears the accumulators; done pulses 8 cycles after
// the last issue, when acc0/acc1 hold the finished blocks. The walk order
// follows the paper; the skip-scan, the sequential decompress-then-issue
// order and the drain time are this design's choices.
module mm_half
  import wino_pkg::*;
#(
  parameter int MB = 2,   // bits of a block coordinate
  parameter int KB = 4    // FIFO depth = inner blocks
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      fifo_load,
  input  apair_t    fifo_din,
  input  logic [MB-1:0] fifo_tag,
  input  logic      start,
  input  logic [MB-1:0] jb,
  input  logic [15:0] nnzb,
  output logic [15:0] blk_raddr [2],
  input  bcoo_blk_t blk_rdata [2],
  output logic [15:0] ent_raddr,
  input  bcoo_ent_t ent_rdata,
  output acc_t      acc0 [L][L],
  output acc_t      acc1 [L][L],
  output logic      done,
  output logic      issue_blk,  // a weight block is issued (one pulse each)
  output logic      skip_blk    // a block of another column is skipped
);

  typedef enum logic [2:0] {H_IDLE, H_SCAN, H_FETCH, H_ISSUE, H_DRAIN} hstate_t;
  hstate_t st;

  logic [15:0]   n;
  logic [1:0]    s;
  logic [3:0]    cnt;
  logic [MB-1:0] kb_q, blk_kb, blk_col;
  logic          rotate, dec_start, dec_valid, clr;
  apair_t        head;
  logic [MB-1:0] head_tag;
  data_t         wtile [L][L];
  acc_t          a0_col [L], a1_col [L];
  data_t         b_row [L];

  assign blk_raddr[0] = n;
  assign blk_raddr[1] = n + 16'd1;
  assign blk_kb  = MB'(morton_row(int'(blk_rdata[0].bn), MB));
  assign blk_col = MB'(morton_col(int'(blk_rdata[0].bn), MB));

  circular_fifo #(.T(apair_t), .DEPTH(KB), .TW(MB)) u_fifo (
    .clk, .rst_n,
    .load    (fifo_load),
    .rotate  (rotate),
    .din     (fifo_din),
    .tag_in  (fifo_tag),
    .head    (head),
    .head_tag(head_tag)
  );

  bcoo_decompressor #(.IW(16)) u_dec (
    .clk, .rst_n,
    .start     (dec_start),
    .idx_first (blk_rdata[0].bi),
    .idx_last  (blk_rdata[1].bi),
    .rd_idx    (ent_raddr),
    .ent       (ent_rdata),
    .tile      (wtile),
    .tile_valid(dec_valid)
  );

  always_comb begin
    rotate    = (st == H_FETCH) && (head_tag != kb_q);
    dec_start = (st == H_SCAN) && (n != nnzb) && (blk_col == jb);
    clr       = (st == H_IDLE) && start;
    issue_blk = (st == H_FETCH) && !rotate && dec_valid;
    skip_blk  = (st == H_SCAN) && (n != nnzb) && (blk_col != jb);
    for (int i = 0; i < L; i++) begin
      a0_col[i] = '0;
      a1_col[i] = '0;
      b_row[i]  = '0;
      if (st == H_ISSUE) begin
        a0_col[i] = acc_t'(head.a0[i][s]);
        a1_col[i] = acc_t'(head.a1[i][s]);
        b_row[i]  = wtile[s][i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= H_IDLE;
      n    <= '0;
      s    <= '0;
      cnt  <= '0;
      kb_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        H_IDLE: if (start) begin
          n  <= '0;
          st <= H_SCAN;
        end
        H_SCAN: begin
          if (n == nnzb) begin
            cnt <= '0;
            st  <= H_DRAIN;
          end else if (blk_col == jb) begin
            kb_q <= blk_kb;
            st   <= H_FETCH;
          end else begin
            n <= n + 16'd1;
          end
        end
        H_FETCH: if (issue_blk) begin
          s  <= '0;
          st <= H_ISSUE;
        end
        H_ISSUE: begin
          s <= s + 2'd1;
          if (s == 2'(L-1)) begin
            n  <= n + 16'd1;
            st <= H_SCAN;
          end
        end
        H_DRAIN: begin
          cnt <= cnt + 4'd1;
          if (cnt == 4'd7) begin
            done <= 1'b1;
            st   <= H_IDLE;
          end
        end
        default: st <= H_IDLE;
      endcase
    end
  end

  mm_systolic_array u_arr0 (.clk, .rst_n, .clr, .a_col(a0_col), .b_row(b_row), .acc(acc0));
  mm_systolic_array u_arr1 (.clk, .rst_n, .clr, .a_col(a1_col), .b_row(b_row), .acc(acc1));

endmodule
