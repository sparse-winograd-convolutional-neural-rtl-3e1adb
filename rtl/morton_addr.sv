// Z-Morton block address translation.
//
// A matrix is stored as 4x4 blocks; the logical block (row, col) is placed at
// the physical block number obtained by interleaving the bits of row and
// col: phys = {row[BITS-1], col[BITS-1], ..., row[0], col[0]}. Within each
// bit pair the row bit is the more significant one, which gives the order
// B0 B1 / B2 B3 of every 2x2 quadrant, recursively. Pure wiring (a LUT
// function on an FPGA); combinational, no latency.
module morton_addr #(
  parameter int BITS = 2
) (
  input  logic [BITS-1:0]   row,
  input  logic [BITS-1:0]   col,
  output logic [2*BITS-1:0] phys
);
  for (genvar b = 0; b < BITS; b++) begin : g_bit
    assign phys[2*b]     = col[b];
    assign phys[2*b + 1] = row[b];
  end
endmodule
