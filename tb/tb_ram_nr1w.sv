// Testbench for ram_nr1w: random element-masked writes against a model array,
// read back on two ports every cycle.
module tb_ram_nr1w;
  localparam int DEPTH = 16, NE = 4, EW = 8, NR = 2;
  logic clk = 0;
  logic [NE-1:0] we;
  logic [3:0] waddr;
  logic [NE-1:0][EW-1:0] wdata;
  logic [3:0] raddr [NR];
  logic [NE-1:0][EW-1:0] rdata [NR];
  logic [NE-1:0][EW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  ram_nr1w #(.DEPTH(DEPTH), .NE(NE), .EW(EW), .NR(NR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    we = '0; waddr = '0; wdata = '0; raddr[0] = '0; raddr[1] = '0;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      we = NE'($urandom); waddr = 4'($urandom); wdata = {$urandom, $urandom} ;
      raddr[0] = 4'($urandom); raddr[1] = 4'($urandom);
      #1;
      for (int p = 0; p < NR; p++) begin
        checks++;
        if (rdata[p] !== model[raddr[p]]) begin failures++; $display("read port %0d addr %0d", p, raddr[p]); end
      end
      @(posedge clk);
      for (int e = 0; e < NE; e++) if (we[e]) model[waddr][e] = wdata[e];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
