// tb_h_memory: self-checking testbench of h_memory at its default size (128 x 32).
// Writes random columns to every address, reads all of them back in parallel, then
// checks that a cycle with we low changes nothing and that a rewrite hits only its
// own address.
module tb_h_memory;
  import orbgrand_pkg::*;
  localparam int N = N_DEF, SW = SW_DEF;
  logic clk = 0, we = 0;
  logic [$clog2(N)-1:0] waddr = '0;
  logic [SW-1:0] wcol = '0, col [N], model [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  h_memory u_dut (.clk(clk), .we(we), .waddr(waddr), .wcol(wcol), .col(col));

  task automatic compare(input string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (col[i] !== model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d", what, i);
      end
    end
  endtask

  initial begin
    repeat (N * 4 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1; waddr = $clog2(N)'(i); wcol = SW'($urandom); model[i] = wcol;
    end
    @(negedge clk); we = 0;
    compare("after load");
    waddr = 5; wcol = ~model[5];
    @(negedge clk);
    compare("we low");
    we = 1; waddr = 9; wcol = SW'($urandom); model[9] = wcol;
    @(negedge clk); we = 0;
    compare("single write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
