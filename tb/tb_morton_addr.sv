// Testbench for morton_addr: the 4x4-block example (B6 at row 1, column 2 is
// physical block 6; the Z order B0 B1 B2 B3 B4 ...) and an exhaustive check
// for 3-bit coordinates against a bit-by-bit interleave written here.
module tb_morton_addr;
  logic [1:0] r2, c2;
  logic [3:0] p2;
  logic [2:0] r3, c3;
  logic [5:0] p3;
  int checks = 0, failures = 0;
  // physical block numbers of the 4x4 grid, row by row
  int grid [4][4] = '{'{0, 1, 4, 5}, '{2, 3, 6, 7}, '{8, 9, 12, 13}, '{10, 11, 14, 15}};

  morton_addr #(.BITS(2)) dut2 (.row(r2), .col(c2), .phys(p2));
  morton_addr #(.BITS(3)) dut3 (.row(r3), .col(c3), .phys(p3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) begin
        r2 = 2'(r); c2 = 2'(c); #1;
        checks++;
        if (int'(p2) != grid[r][c]) begin
          failures++;
          $display("(%0d,%0d) -> %0d, expected %0d", r, c, p2, grid[r][c]);
        end
      end
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        int e;
        e = (((r >> 2) & 1) << 5) | (((c >> 2) & 1) << 4) | (((r >> 1) & 1) << 3) |
            (((c >> 1) & 1) << 2) | ((r & 1) << 1) | (c & 1);
        r3 = 3'(r); c3 = 3'(c); #1;
        checks++;
        if (int'(p3) != e) begin failures++; $display("3-bit (%0d,%0d) -> %0d", r, c, p3); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
