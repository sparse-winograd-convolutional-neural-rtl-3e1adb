// Testbench for circular_fifo: loads DEPTH tagged entries, checks FIFO order
// at the head, then rotates random numbers of steps and checks that the head
// is the entry a circular model predicts; reloads with new data.
module tb_circular_fifo;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0;
  logic load, rotate;
  logic [31:0] din, head;
  logic [2:0] tag_in, head_tag;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  circular_fifo #(.T(logic [31:0]), .DEPTH(DEPTH), .TW(3)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hp;
    load = 0; rotate = 0; din = '0; tag_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        load = 1; din = $urandom; tag_in = 3'(i); model[i] = din;
      end
      @(negedge clk); load = 0;
      hp = 0;
      for (int it = 0; it < 30; it++) begin
        int steps;
        steps = $urandom_range(0, 7);
        for (int k = 0; k < steps; k++) begin
          rotate = 1; @(negedge clk);
        end
        rotate = 0;
        hp = (hp + steps) % DEPTH;
        checks++;
        if (head !== model[hp] || int'(head_tag) != hp) begin
          failures++;
          $display("head %h tag %0d, expected %h tag %0d", head, head_tag, model[hp], hp);
        end
        @(negedge clk);
      end
      // bring the head back to entry 0 before reloading
      while (head_tag != 0) begin rotate = 1; @(negedge clk); end
      rotate = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
