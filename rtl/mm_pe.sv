// Multiply-accumulate PE of the matrix-multiplication arrays (one DSP).
//
// Output stationary: a (transformed feature map) moves east, b (transformed
// weight) moves south, and the PE keeps acc += a * b, so partial results stay
// inside the array between iterations, as the paper describes. clr zeroes the
// accumulator (it takes priority over the product of that cycle).
// One-cycle latency from a_in/b_in to a_out/b_out and to acc.
module mm_pe
  import wino_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  acc_t  a_in,
  input  data_t b_in,
  output acc_t  a_out,
  output data_t b_out,
  output acc_t  acc
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= clr ? '0 : acc + a_in * acc_t'(b_in);
    end
  end
endmodule
