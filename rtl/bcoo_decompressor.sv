// Decompressor for one BCOO-compressed 4x4 weight block.
//
// In the block-based coordinate format only 4x4 blocks holding nonzeros are
// stored. Block n's nonzeros occupy entries BI[n] .. BI[n+1]-1 of three
// parallel arrays: A_I (row in the block), A_J (column in the block) and A_N
// (value). On start the decompressor clears its tile and then reads one entry
// per cycle through rd_idx/ent, writing A_N into tile[A_I][A_J]. tile_valid goes
// high the cycle after the last entry has been written and stays high until
// the next start. A block of k nonzeros takes k cycles. The format follows the
// paper; the one-entry-per-cycle structure is this design's choice.
module bcoo_decompressor
  import wino_pkg::*;
#(
  parameter int IW = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic [IW-1:0] idx_first,
  input  logic [IW-1:0] idx_last,   // one past the block's last entry
  output logic [IW-1:0] rd_idx,
  input  bcoo_ent_t ent,
  output data_t     tile [L][L],
  output logic      tile_valid
);

  logic          busy;
  logic [IW-1:0] idx_q, end_q;

  assign rd_idx = idx_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      tile_valid <= 1'b0;
      idx_q      <= '0;
      end_q      <= '0;
      for (int i = 0; i < L; i++)
        for (int j = 0; j < L; j++) tile[i][j] <= '0;
    end else if (start) begin
      for (int i = 0; i < L; i++)
        for (int j = 0; j < L; j++) tile[i][j] <= '0;
      idx_q      <= idx_first;
      end_q      <= idx_last;
      busy       <= (idx_first != idx_last);
      tile_valid <= (idx_first == idx_last);
    end else if (busy) begin
      tile[ent.er][ent.ec] <= ent.ev;
      idx_q <= idx_q + 1'b1;
      if (idx_q + 1'b1 == end_q) begin
        busy       <= 1'b0;
        tile_valid <= 1'b1;
      end
    end
  end

endmodule
