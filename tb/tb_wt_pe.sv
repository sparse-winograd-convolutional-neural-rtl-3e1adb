// Testbench for wt_pe: loads each coefficient code (+1, -1, 0) and checks that
// the PE adds, subtracts or passes its west input into the north sum, and that
// d_out and c_out appear one cycle after the inputs.
module tb_wt_pe;
  import wino_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rb_load;
  coef_t rb_in;
  acc_t d_in, c_in, d_out, c_out;
  int checks = 0, failures = 0;

  wt_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    coef_t codes [3];
    acc_t exp_c;
    codes = '{CO_POS, CO_NEG, CO_ZERO};
    rb_load = 0; rb_in = CO_ZERO; d_in = '0; c_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3; c++) begin
      @(negedge clk); rb_load = 1; rb_in = codes[c];
      @(negedge clk); rb_load = 0;
      for (int i = 0; i < 50; i++) begin
        d_in = $signed($urandom) >>> 8;
        c_in = $signed($urandom) >>> 8;
        exp_c = (c == 0) ? c_in + d_in : (c == 1) ? c_in - d_in : c_in;
        @(negedge clk);
        checks++;
        if (c_out !== exp_c || d_out !== d_in) begin
          failures++;
          $display("code %0d: d=%0d c=%0d -> c_out=%0d d_out=%0d exp %0d", c, d_in, c_in, c_out, d_out, exp_c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
