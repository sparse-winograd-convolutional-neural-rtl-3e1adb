// Winograd-transform processing element.
//
// Holds three registers: R_B, a stationary coefficient of the transform matrix
// B; R_D, which passes the west input d[i,k] on to the east neighbour; and
// R_C, the partial sum passed south. Every cycle R_C <= c_in + R_B * d_in,
// where the "multiplication" is only a control of the adder: R_B = +1 adds,
// -1 subtracts and 0 passes c_in unchanged. There is no multiplier.
// The three registers and the adder follow the paper's PE drawing; the 2-bit
// code for R_B and the synchronous active-low reset are this design's choice.
//
// Timing: one-cycle latency from d_in/c_in to d_out/c_out. R_B is written
// when rb_load is high.
module wt_pe
  import wino_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rb_load,
  input  coef_t rb_in,
  input  acc_t  d_in,
  input  acc_t  c_in,
  output acc_t  d_out,
  output acc_t  c_out
);

  coef_t rb_q;
  acc_t  rd_q, rc_q, sum;

  always_comb begin
    unique case (rb_q)
      CO_POS:  sum = c_in + d_in;
      CO_NEG:  sum = c_in - d_in;
      default: sum = c_in;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rb_q <= CO_ZERO;
      rd_q <= '0;
      rc_q <= '0;
    end else begin
      if (rb_load) rb_q <= rb_in;
      rd_q <= d_in;
      rc_q <= sum;
    end
  end

  assign d_out = rd_q;
  assign c_out = rc_q;

endmodule
