// Shared definitions for the sparse Winograd accelerator.
//
// The design computes F(2x2, 3x3) Winograd convolution: output tile m = 2,
// filter r = 3, input tile l = m + r - 1 = 4. All systolic arrays are l x l.
// Data enter as 16-bit signed integers (the 16-bit mode of the 8-16 bit
// fixed-point datapath); every sum and product is carried in a 32-bit
// accumulator. The accumulator width and the purely integer arithmetic (no
// fixed-point scaling) are choices of this design.
//
// The package also holds the forward transform matrix B (stationary in the
// transform arrays), the inverse matrix A^T, the 2-bit adder-control code used
// by the transform PEs, and the Z-Morton (bit-interleaving) address functions.
package wino_pkg;

  localparam int M  = 2;          // output tile size
  localparam int R  = 3;          // filter size
  localparam int L  = M + R - 1;  // input tile / systolic array size
  localparam int DW = 16;         // input data and weight width
  localparam int AW = 32;         // accumulator width

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;

  // Adder control held in a transform PE: pass, add, subtract.
  typedef enum logic [1:0] {
    CO_ZERO = 2'b00,
    CO_POS  = 2'b01,
    CO_NEG  = 2'b11
  } coef_t;

  // B for F(2,3): B[k][j]; B^T = [1 0 -1 0; 0 1 1 0; 0 -1 1 0; 0 1 0 -1].
  function automatic int b_val(logic [1:0] k, logic [1:0] j);
    int bt [4][4];
    bt = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, 1, 0, -1}};
    return bt[j][k];
  endfunction

  function automatic coef_t b_coef(logic [1:0] k, logic [1:0] j);
    int v;
    v = b_val(k, j);
    return (v > 0) ? CO_POS : (v < 0) ? CO_NEG : CO_ZERO;
  endfunction

  // A^T for F(2,3): [1 1 1 0; 0 1 -1 -1].
  function automatic int at_val(logic p, logic [1:0] k);
    int at [2][4];
    at = '{'{1, 1, 1, 0}, '{0, 1, -1, -1}};
    return at[p][k];
  endfunction

  // Z-Morton: interleave row and column bits, row bit more significant in
  // each pair (B0 B1 / B2 B3 order of a 2x2 quadrant).
  function automatic int unsigned morton_enc(int unsigned row, int unsigned col, int bits);
    int unsigned a;
    a = 0;
    for (int b = 0; b < bits; b++) begin
      a |= ((row >> b) & 1) << (2 * b + 1);
      a |= ((col >> b) & 1) << (2 * b);
    end
    return a;
  endfunction

  function automatic int unsigned morton_row(int unsigned a, int bits);
    int unsigned v;
    v = 0;
    for (int b = 0; b < bits; b++) v |= ((a >> (2 * b + 1)) & 1) << b;
    return v;
  endfunction

  function automatic int unsigned morton_col(int unsigned a, int bits);
    int unsigned v;
    v = 0;
    for (int b = 0; b < bits; b++) v |= ((a >> (2 * b)) & 1) << b;
    return v;
  endfunction

  // One BCOO nonzero: position inside its 4x4 block and value (A_I, A_J, A_N).
  typedef struct packed {
    logic [1:0] er;   // A_I: row inside the block
    logic [1:0] ec;   // A_J: column inside the block
    data_t      ev;   // A_N: value
  } bcoo_ent_t;

  // A 4x4 tile as one packed word, as stored in the tile buffers.
  typedef acc_t [L-1:0][L-1:0] ptile_t;

  // One entry of a cluster's feature-map circular FIFO: the two A tiles of
  // block rows ib and ib + RB/2 that share one inner block index.
  typedef struct packed {
    ptile_t a0;
    ptile_t a1;
  } apair_t;

  // One BCOO block record: Z-Morton block number (BN) and first nonzero (BI).
  typedef struct packed {
    logic [15:0] bn;
    logic [15:0] bi;
  } bcoo_blk_t;

endpackage
