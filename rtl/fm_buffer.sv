// Input feature-map buffer for one layer: C channels of H x W 16-bit values.
//
// The host writes one value per cycle (we, wc, wy, wx, wdata). The transform
// engine reads strips: for channel rc, tile-row group tyg and tile-column
// group txg, chain ch receives in cycle s the column x = 2*(txg*NUM_CHAINS+ch)+s
// of rows y = 2*CHAIN_LEN*tyg .. 2*CHAIN_LEN*tyg + 2*CHAIN_LEN+1, i.e. the
// 4-wide column strip covering CHAIN_LEN vertically overlapping 4x4 tiles
// (stride m = 2). Positions outside the map read as zero. Reads are
// asynchronous. The paper only says the feature maps are fed in real time;
// this organisation and its many read ports (as banked registers) are this
// design's choice.
module fm_buffer
  import wino_pkg::*;
#(
  parameter int C          = 16,
  parameter int H          = 10,
  parameter int W          = 10,
  parameter int CHAIN_LEN  = 4,
  parameter int NUM_CHAINS = 4,
  localparam int CBW = (C > 1) ? $clog2(C) : 1,
  localparam int YBW = $clog2(H),
  localparam int XBW = $clog2(W)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [CBW-1:0] wc,
  input  logic [YBW-1:0] wy,
  input  logic [XBW-1:0] wx,
  input  data_t          wdata,
  input  logic [CBW-1:0] rc,
  input  logic [7:0]     tyg,
  input  logic [7:0]     txg,
  input  logic [1:0]     s,
  output data_t          strip [NUM_CHAINS][2*CHAIN_LEN+2]
);

  data_t mem [C][H][W];

  initial
    for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) mem[c][y][x] = '0;

  always_ff @(posedge clk)
    if (we) mem[wc][wy][wx] <= wdata;

  always_comb begin
    for (int ch = 0; ch < NUM_CHAINS; ch++)
      for (int r = 0; r < 2*CHAIN_LEN+2; r++) begin
        int y, x;
        y = 2*CHAIN_LEN*int'(tyg) + r;
        x = 2*(int'(txg)*NUM_CHAINS + ch) + int'(s);
        strip[ch][r] = (y < H && x < W) ? mem[rc][y][x] : '0;
      end
  end

endmodule
