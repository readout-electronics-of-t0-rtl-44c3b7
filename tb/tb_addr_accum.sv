`timescale 1ps/1ps
// tb_addr_accum: random write strobes; the write address must advance by one
// per write and wrap after DEPTH writes.
module tb_addr_accum;
  localparam int DEPTH = 64;
  logic clk = 0, rst = 1, wr = 0;
  logic [5:0] addr;
  int checks = 0, failures = 0, n_wr = 0, wraps = 0;

  addr_accum #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (int'(addr) != n_wr % DEPTH) begin
        failures++; $display("FAIL addr=%0d exp=%0d", addr, n_wr % DEPTH);
      end
      wr = ($urandom % 3) != 0;
      @(posedge clk);
      if (wr) begin n_wr++; if (n_wr % DEPTH == 0) wraps++; end
    end
    checks++;
    if (wraps < 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
