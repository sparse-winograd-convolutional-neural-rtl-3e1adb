// Testbench for mm_pe: random signed operand streams with random clears;
// checks the forwarded operands and the running sum of products.
module tb_mm_pe;
  import wino_pkg::*;
  logic clk = 0, rst_n = 0, clr;
  acc_t a_in, a_out, acc;
  data_t b_in, b_out;
  longint model;
  int checks = 0, failures = 0;

  mm_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; a_in = '0; b_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    model = 0;
    for (int i = 0; i < 1000; i++) begin
      clr  = ($urandom_range(0, 19) == 0);
      a_in = acc_t'(int'($urandom_range(0, 400000)) - 200000);
      b_in = data_t'($urandom);
      model = clr ? 0 : model + longint'(a_in) * longint'(b_in);
      @(negedge clk);
      checks++;
      if (acc !== acc_t'(model) || a_out !== a_in || b_out !== b_in) begin
        failures++;
        $display("step %0d acc %0d expected %0d", i, acc, acc_t'(model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
