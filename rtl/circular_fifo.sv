// Circular FIFO of tiles built from shift registers.
//
// DEPTH entries of type T, each with a TW-bit tag (the inner block index kb
// of the tiles it holds). load shifts din/tag_in in at the tail while every
// entry moves one place towards the head; rotate moves the head entry to the
// tail, so after DEPTH rotations the FIFO is back where it started. The head
// entry and its tag are always visible. Loaded once with a row of
// feature-map tiles, the FIFO supplies them again and again for every block
// column of the weights without re-reading the buffer. The shift-register
// construction follows the paper; entry contents and the tag are this
// design's choice. One operation per cycle; load has priority.
module circular_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 4,
  parameter int  TW    = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          rotate,
  input  T              din,
  input  logic [TW-1:0] tag_in,
  output T              head,
  output logic [TW-1:0] head_tag
);

  T              q   [DEPTH];
  logic [TW-1:0] tq  [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        q[i]  <= '0;
        tq[i] <= '0;
      end
    end else if (load || rotate) begin
      for (int i = 0; i < DEPTH-1; i++) begin
        q[i]  <= q[i+1];
        tq[i] <= tq[i+1];
      end
      q[DEPTH-1]  <= load ? din    : q[0];
      tq[DEPTH-1] <= load ? tag_in : tq[0];
    end
  end

  assign head     = q[0];
  assign head_tag = tq[0];

endmodule
