// Testbench for fm_buffer (2 channels of 10x10, chains of 2 arrays, 2 chains):
// writes random maps, then checks every strip column of every channel and
// tile group against the stride-2, overlap-2 strip geometry, including the
// zero padding outside the map.
module tb_fm_buffer;
  import wino_pkg::*;
  localparam int C = 2, H = 10, W = 10, CL = 2, NC = 2;
  logic clk = 0, we;
  logic [0:0] wc, rc;
  logic [3:0] wy, wx;
  data_t wdata;
  logic [7:0] tyg, txg;
  logic [1:0] s;
  data_t strip [NC][2*CL+2];
  int img [C][H][W];
  int checks = 0, failures = 0;

  fm_buffer #(.C(C), .H(H), .W(W), .CHAIN_LEN(CL), .NUM_CHAINS(NC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wc = '0; wy = '0; wx = '0; wdata = '0; rc = '0; tyg = '0; txg = '0; s = '0;
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          img[c][y][x] = int'($urandom_range(1, 30000));
          @(negedge clk);
          we = 1; wc = 1'(c); wy = 4'(y); wx = 4'(x); wdata = data_t'(img[c][y][x]);
        end
    @(negedge clk); we = 0;
    for (int c = 0; c < C; c++)
      for (int ty = 0; ty < 3; ty++)
        for (int tx = 0; tx < 3; tx++)
          for (int ss = 0; ss < 4; ss++) begin
            rc = 1'(c); tyg = 8'(ty); txg = 8'(tx); s = 2'(ss);
            #1;
            for (int ch = 0; ch < NC; ch++)
              for (int r = 0; r < 2*CL+2; r++) begin
                int y, x, e;
                y = 2*CL*ty + r;
                x = 2*(tx*NC + ch) + ss;
                e = (y < H && x < W) ? img[c][y][x] : 0;
                checks++;
                if (int'(strip[ch][r]) != e) begin
                  failures++;
                  $display("c%0d tyg%0d txg%0d s%0d ch%0d r%0d: %0d expected %0d", c, ty, tx, ss, ch, r, strip[ch][r], e);
                end
              end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
