// On-chip buffer with one write port and NR read ports.
//
// Each word holds NE elements of EW bits; the write port has one enable per
// element, so a single element of a word (one value of a 4x4 tile) can be
// written without touching the others. Writes are synchronous; reads are
// asynchronous (combinational from the address). The port structure and
// the asynchronous read are this design's simplification; on an FPGA the
// buffers would be block RAMs with registered reads. There is no reset of
// the contents: the array is initialised to zero at time zero only.
module ram_nr1w #(
  parameter int DEPTH = 16,
  parameter int NE    = 1,
  parameter int EW    = 32,
  parameter int NR    = 1,
  localparam int AWD  = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                   clk,
  input  logic [NE-1:0]          we,
  input  logic [AWD-1:0]         waddr,
  input  logic [NE-1:0][EW-1:0]  wdata,
  input  logic [AWD-1:0]         raddr [NR],
  output logic [NE-1:0][EW-1:0]  rdata [NR]
);

  logic [NE-1:0][EW-1:0] mem [DEPTH];

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk)
    for (int e = 0; e < NE; e++)
      if (we[e]) mem[waddr][e] <= wdata[e];

  for (genvar p = 0; p < NR; p++) begin : g_rd
    assign rdata[p] = mem[raddr[p]];
  end

endmodule
