// Testbench for bcoo_decompressor: random sparse 4x4 blocks (1..16 nonzeros)
// are compressed here into A_I/A_J/A_N lists at a random offset, decompressed,
// and compared with the original block; checks that a block of k nonzeros
// takes k cycles. Includes the paper's example block with nonzeros at (0,0),
// (1,2) and (3,1).
module tb_bcoo_decompressor;
  import wino_pkg::*;
  logic clk = 0, rst_n = 0, start, tile_valid;
  logic [7:0] idx_first, idx_last, rd_idx;
  bcoo_ent_t ent;
  data_t tile [L][L];
  bcoo_ent_t mem [256];
  int checks = 0, failures = 0;

  bcoo_decompressor #(.IW(8)) dut (.*);
  assign ent = mem[rd_idx];
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int blk [4][4];
    int nz, base, lat;
    start = 0; idx_first = '0; idx_last = '0;
    for (int i = 0; i < 256; i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      blk = '{default: 0};
      if (it == 0) begin
        blk[0][0] = 11; blk[1][2] = -12; blk[3][1] = 13;
      end else begin
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            if ($urandom_range(0, 2) == 0) blk[i][j] = int'($urandom_range(1, 60000)) - 30000;
        if (blk[1][1] == 0) blk[1][1] = it;
      end
      base = $urandom_range(0, 200);
      nz = 0;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          if (blk[i][j] != 0) begin
            mem[base + nz] = '{er: 2'(i), ec: 2'(j), ev: data_t'(blk[i][j])};
            nz++;
          end
      @(negedge clk);
      start = 1; idx_first = 8'(base); idx_last = 8'(base + nz);
      @(negedge clk);
      start = 0;
      lat = 0;
      while (!tile_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != nz) begin failures++; $display("block of %0d nonzeros took %0d cycles", nz, lat); end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (int'(tile[i][j]) != blk[i][j]) begin
            failures++;
            $display("tile[%0d][%0d] = %0d, expected %0d", i, j, tile[i][j], blk[i][j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
