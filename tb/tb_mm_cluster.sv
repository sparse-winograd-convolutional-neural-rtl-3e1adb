// Testbench for mm_cluster: a 16x16 feature-map matrix A (Z-Morton tiles)
// times a 16x16 weight matrix B stored in BCOO form, with the buffers modelled
// here. Three cases: a dense B (every block stored), a block-sparse B with
// about half the blocks zero and sparse blocks inside, and a B with an
// entirely empty block column. C is compared with a plain triple-loop product.
// Also checks that every stored block is issued once per pair of block rows
// and that the sparse case finishes faster than the dense one.
module tb_mm_cluster;
  import wino_pkg::*;
  localparam int RB = 4, KB = 4, JB = 4, MB = 2, N = 16;
  logic clk = 0, rst_n = 0, start, done;
  logic [15:0] nnzb;
  logic [3:0] a_raddr [2];
  ptile_t a_rdata [2];
  logic [15:0] blk_raddr [4];
  bcoo_blk_t blk_rdata [4];
  logic [15:0] ent_raddr [2];
  bcoo_ent_t ent_rdata [2];
  logic c_we;
  logic [3:0] c_waddr;
  ptile_t c_wdata;
  logic [1:0] issue_blk, skip_blk;

  ptile_t    amem [16];
  bcoo_blk_t bmem [17];
  bcoo_ent_t emem [256];
  ptile_t    cmem [16];
  int checks = 0, failures = 0;
  int issues;

  mm_cluster #(.RB(RB), .KB(KB), .JB(JB)) dut (.*);

  for (genvar p = 0; p < 2; p++) begin : g_a
    assign a_rdata[p]   = amem[a_raddr[p]];
    assign ent_rdata[p] = emem[ent_raddr[p][7:0]];
  end
  for (genvar p = 0; p < 4; p++) begin : g_b
    assign blk_rdata[p] = bmem[blk_raddr[p] > 16 ? 16 : blk_raddr[p]];
  end
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (c_we) cmem[c_waddr] <= c_wdata;
    if (rst_n) issues += $countones(issue_blk);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int menc(int r, int c);
    return ((r >> 1) << 3) | ((c >> 1) << 2) | ((r & 1) << 1) | (c & 1);
  endfunction

  task automatic run_case(input int mode, output int cycles);
    int a [N][N], b [N][N], c [N][N];
    int nb, ne;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        a[i][j] = int'($urandom_range(0, 2000)) - 1000;
        b[i][j] = int'($urandom_range(0, 2000)) - 1000;
      end
    // sparsify B by blocks
    for (int bi = 0; bi < 4; bi++)
      for (int bj = 0; bj < 4; bj++) begin
        logic zero_blk;
        zero_blk = (mode == 1) ? ($urandom_range(0, 1) == 0) : (mode == 2) ? (bj == 1) : 1'b0;
        if (mode == 1 && bi == 0 && bj == 0) zero_blk = 1'b1;  // the paper's B0 is empty
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            if (zero_blk || (mode == 1 && $urandom_range(0, 2) == 0)) b[4*bi+i][4*bj+j] = 0;
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        c[i][j] = 0;
        for (int k = 0; k < N; k++) c[i][j] += a[i][k] * b[k][j];
      end
    for (int br = 0; br < 4; br++)
      for (int bc = 0; bc < 4; bc++)
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++) amem[menc(br, bc)][i][j] = acc_t'(a[4*br+i][4*bc+j]);
    // BCOO in Z-Morton block order
    nb = 0; ne = 0;
    for (int m = 0; m < 16; m++) begin
      int br, bc, cnt;
      br = ((m >> 3) & 1) * 2 + ((m >> 1) & 1);
      bc = ((m >> 2) & 1) * 2 + (m & 1);
      cnt = 0;
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++)
          if (b[4*br+i][4*bc+j] != 0) cnt++;
      if (cnt > 0) begin
        bmem[nb] = '{bn: 16'(m), bi: 16'(ne)};
        nb++;
        for (int i = 0; i < 4; i++)
          for (int j = 0; j < 4; j++)
            if (b[4*br+i][4*bc+j] != 0) begin
              emem[ne] = '{er: 2'(i), ec: 2'(j), ev: data_t'(b[4*br+i][4*bc+j])};
              ne++;
            end
      end
    end
    bmem[nb] = '{bn: 16'hffff, bi: 16'(ne)};
    nnzb = 16'(nb);
    for (int t = 0; t < 16; t++) cmem[t] = '1;
    issues = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    checks++;
    if (issues != nb * (RB/2)) begin failures++; $display("mode %0d: %0d issues, expected %0d", mode, issues, nb*(RB/2)); end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (cmem[menc(i/4, j/4)][i%4][j%4] !== acc_t'(c[i][j])) begin
          failures++;
          if (failures < 10) $display("mode %0d C[%0d][%0d] = %0d, expected %0d", mode, i, j,
                                      $signed(cmem[menc(i/4, j/4)][i%4][j%4]), c[i][j]);
        end
      end
    $display("mode %0d: %0d stored blocks, %0d cycles", mode, nb, cycles);
  endtask

  initial begin
    int cyc_dense, cyc_sparse, cyc_col;
    start = 0; nnzb = '0;
    for (int i = 0; i < 256; i++) emem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_case(0, cyc_dense);
    run_case(1, cyc_sparse);
    run_case(2, cyc_col);
    run_case(1, cyc_sparse);
    checks++;
    if (cyc_sparse >= cyc_dense) begin failures++; $display("sparse not faster"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
