// End-to-end testbench for winograd_accel at its default size (16 channels of
// 10x10 input, 16 filters, output 8x8 per filter). The host side is modelled
// here: it writes the input maps and the BCOO weights through the load ports
// and reads the output buffer.
//
// Run 1 (dense): spatial 3x3 filters g are transformed here with integer
// matrices, U' = (2G) g (2G)^T = 4 G g G^T, every weight block stored. The
// result must be exactly 4x the direct convolution of the input.
// Run 2 (pruned): random transformed weights with about 40% of the 4x4 weight
// blocks empty and a third of the remaining values zero, ReLU and 2x2 max
// pooling on; compared with a reference computed here in the Winograd domain
// (V = B^T d B, M = sum_c U .* V, Y = A^T M A).
// Mechanisms counted, each must occur: overlap forwarding between transform
// arrays, FIFO rotations, skipped block-list entries, empty blocks never
// multiplied, both cluster iterations, ReLU clamps and pooling.
module tb_winograd_accel;
  import wino_pkg::*;
  localparam int C = 16, K = 16, TH = 4, TW = 4, H = 2*TH + 2, W = 2*TW + 2;
  localparam int NB = TH*TW, OH = H - 2, OW = W - 2;

  logic clk = 0, rst_n = 0;
  logic start, relu_en, pool_en, busy, done;
  logic fm_we;
  logic [3:0] fm_c, fm_y, fm_x;
  data_t fm_data;
  logic [3:0] w_mat;
  logic w_blk_we, w_ent_we, w_nnzb_we;
  logic [15:0] w_addr, w_nnzb;
  bcoo_blk_t w_blk;
  bcoo_ent_t w_ent;
  logic [7:0] out_raddr;
  acc_t out_rdata [M][M];
  logic [31:0] stat_issued, stat_skipped;

  winograd_accel dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fwd = 0, n_rot = 0, n_iter2 = 0, n_relu = 0, n_pool = 0;

  int d [C][H][W];
  int g [K][C][3][3];
  int u [K][C][4][4];      // transformed weights U[k][c]
  int yref [K][OH][OW];
  int bt [4][4] = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};
  int g2 [4][3] = '{'{2, 0, 0}, '{1, 1, 1}, '{1, -1, 1}, '{0, 0, 2}};  // 2G
  int at [2][4] = '{'{1, 1, 1, 0}, '{0, 1, -1, -1}};

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_wt.g_chain[0].g_unit[1].u_unit.go) n_fwd++;
      if (dut.g_cl[0].u_cl.g_half[0].u_half.rotate) n_rot++;
      if (dut.cl_start && dut.git == 1) n_iter2++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int menc(int r, int c);
    return ((r >> 1) << 3) | ((c >> 1) << 2) | ((r & 1) << 1) | (c & 1);
  endfunction

  task automatic load_inputs();
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          fm_we = 1; fm_c = 4'(c); fm_y = 4'(y); fm_x = 4'(x); fm_data = data_t'(d[c][y][x]);
        end
    @(negedge clk); fm_we = 0;
    // BCOO per Winograd matrix e: B_e[c][k] = U[k][c][e/4][e%4]
    for (int e = 0; e < 16; e++) begin
      int nb, ne;
      nb = 0; ne = 0;
      for (int m = 0; m < 16; m++) begin
        int br, bc, cnt;
        br = ((m >> 3) & 1) * 2 + ((m >> 1) & 1);
        bc = ((m >> 2) & 1) * 2 + (m & 1);
        cnt = 0;
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            if (u[4*bc+j][4*br+i][e/4][e%4] != 0) cnt++;
        if (cnt > 0) begin
          @(negedge clk);
          w_mat = 4'(e); w_blk_we = 1; w_addr = 16'(nb); w_blk = '{bn: 16'(m), bi: 16'(ne)};
          @(negedge clk); w_blk_we = 0;
          nb++;
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++)
              if (u[4*bc+j][4*br+i][e/4][e%4] != 0) begin
                w_ent_we = 1; w_addr = 16'(ne);
                w_ent = '{er: 2'(i), ec: 2'(j), ev: data_t'(u[4*bc+j][4*br+i][e/4][e%4])};
                @(negedge clk);
                ne++;
              end
          w_ent_we = 0;
        end
      end
      @(negedge clk);
      w_mat = 4'(e); w_blk_we = 1; w_addr = 16'(nb); w_blk = '{bn: 16'hffff, bi: 16'(ne)};
      @(negedge clk); w_blk_we = 0; w_nnzb_we = 1; w_nnzb = 16'(nb);
      @(negedge clk); w_nnzb_we = 0;
    end
  endtask

  task automatic run_and_check(input int run, input logic relu, input logic pool);
    int cyc;
    @(negedge clk);
    relu_en = relu; pool_en = pool; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("run %0d: %0d cycles, %0d blocks issued, %0d list entries skipped",
             run, cyc, stat_issued, stat_skipped);
    for (int k = 0; k < K; k++)
      for (int ty = 0; ty < TH; ty++)
        for (int tx = 0; tx < TW; tx++) begin
          int r [2][2], mx;
          out_raddr = 8'(k*NB + ty*TW + tx);
          #1;
          for (int p = 0; p < 2; p++)
            for (int q = 0; q < 2; q++) begin
              r[p][q] = yref[k][2*ty+p][2*tx+q];
              if (relu && r[p][q] < 0) begin r[p][q] = 0; n_relu++; end
            end
          mx = r[0][0];
          for (int p = 0; p < 2; p++)
            for (int q = 0; q < 2; q++) if (r[p][q] > mx) mx = r[p][q];
          if (pool) begin r[0][0] = mx; n_pool++; end
          for (int p = 0; p < 2; p++)
            for (int q = 0; q < 2; q++) begin
              checks++;
              if (out_rdata[p][q] !== acc_t'(r[p][q])) begin
                failures++;
                if (failures < 10)
                  $display("run %0d k %0d y %0d x %0d: %0d, expected %0d", run, k, 2*ty+p, 2*tx+q,
                           out_rdata[p][q], r[p][q]);
              end
            end
        end
  endtask

  initial begin
    int nzero_blk;
    start = 0; relu_en = 0; pool_en = 0; fm_we = 0; fm_c = '0; fm_y = '0; fm_x = '0; fm_data = '0;
    w_mat = '0; w_blk_we = 0; w_ent_we = 0; w_nnzb_we = 0; w_addr = '0; w_nnzb = '0;
    w_blk = '0; w_ent = '0; out_raddr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- run 1: dense, against direct convolution
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) d[c][y][x] = int'($urandom_range(0, 200)) - 100;
    for (int k = 0; k < K; k++)
      for (int c = 0; c < C; c++) begin
        int t [4][3];
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) g[k][c][i][j] = int'($urandom_range(0, 40)) - 20;
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 3; j++) begin
            t[i][j] = 0;
            for (int a = 0; a < 3; a++) t[i][j] += g2[i][a] * g[k][c][a][j];
          end
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) begin
            u[k][c][i][j] = 0;
            for (int a = 0; a < 3; a++) u[k][c][i][j] += t[i][a] * g2[j][a];
          end
      end
    for (int k = 0; k < K; k++)
      for (int y = 0; y < OH; y++)
        for (int x = 0; x < OW; x++) begin
          yref[k][y][x] = 0;
          for (int c = 0; c < C; c++)
            for (int p = 0; p < 3; p++)
              for (int q = 0; q < 3; q++) yref[k][y][x] += 4 * g[k][c][p][q] * d[c][y+p][x+q];
        end
    load_inputs();
    run_and_check(1, 1'b0, 1'b0);
    checks++;
    if (stat_skipped == 0) begin failures++; $display("no block-list entry skipped"); end

    // ---------------- run 2: pruned weights, ReLU and pooling
    nzero_blk = 0;
    for (int e = 0; e < 16; e++)
      for (int kb = 0; kb < 4; kb++)
        for (int cb = 0; cb < 4; cb++) begin
          logic empty;
          empty = ($urandom_range(0, 9) < 4);
          if (empty) nzero_blk++;
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++)
              u[4*kb+j][4*cb+i][e/4][e%4] =
                (empty || $urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, 600)) - 300;
        end
    for (int k = 0; k < K; k++)
      for (int ty = 0; ty < TH; ty++)
        for (int tx = 0; tx < TW; tx++) begin
          int mt [4][4], t2 [2][4];
          mt = '{default: 0};
          for (int c = 0; c < C; c++) begin
            int t1 [4][4], v [4][4];
            for (int i = 0; i < 4; i++)
              for (int j = 0; j < 4; j++) begin
                t1[i][j] = 0;
                for (int a = 0; a < 4; a++) t1[i][j] += bt[i][a] * d[c][2*ty+a][2*tx+j];
              end
            for (int i = 0; i < 4; i++)
              for (int j = 0; j < 4; j++) begin
                v[i][j] = 0;
                for (int a = 0; a < 4; a++) v[i][j] += t1[i][a] * bt[j][a];
                mt[i][j] += u[k][c][i][j] * v[i][j];
              end
          end
          for (int p = 0; p < 2; p++)
            for (int j = 0; j < 4; j++) begin
              t2[p][j] = 0;
              for (int a = 0; a < 4; a++) t2[p][j] += at[p][a] * mt[a][j];
            end
          for (int p = 0; p < 2; p++)
            for (int q = 0; q < 2; q++) begin
              yref[k][2*ty+p][2*tx+q] = 0;
              for (int a = 0; a < 4; a++) yref[k][2*ty+p][2*tx+q] += t2[p][a] * at[q][a];
            end
        end
    load_inputs();
    begin
      int iss0;
      iss0 = stat_issued;
      run_and_check(2, 1'b1, 1'b1);
      checks++;
      // each stored block is issued once per pair of block rows (2 pairs)
      if (int'(stat_issued) - iss0 != 2 * (256 - nzero_blk)) begin
        failures++;
        $display("issued %0d blocks, expected %0d", int'(stat_issued) - iss0, 2 * (256 - nzero_blk));
      end
    end

    $display("forwarded-lane tiles %0d, FIFO rotations %0d, second cluster iterations %0d, ReLU clamps %0d, pooled tiles %0d, empty blocks %0d",
             n_fwd, n_rot, n_iter2, n_relu, n_pool, nzero_blk);
    checks++; if (n_fwd == 0)     begin failures++; $display("overlap forwarding never used"); end
    checks++; if (n_rot == 0)     begin failures++; $display("FIFO never rotated"); end
    checks++; if (n_iter2 == 0)   begin failures++; $display("second cluster iteration never ran"); end
    checks++; if (n_relu == 0)    begin failures++; $display("ReLU never clamped"); end
    checks++; if (n_pool == 0)    begin failures++; $display("pooling never applied"); end
    checks++; if (nzero_blk == 0) begin failures++; $display("no empty weight block"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
