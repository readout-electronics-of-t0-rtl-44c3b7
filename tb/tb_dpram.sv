`timescale 1ps/1ps
// tb_dpram: random simultaneous writes and reads against an array model;
// the read data must be the word at the previous clock's read address.
module tb_dpram;
  localparam int DEPTH = 64, W = 50;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [W-1:0] din = 0, dout;
  logic [W-1:0] model [DEPTH];
  bit           written [DEPTH];
  int checks = 0, failures = 0;

  dpram #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); din = {18'($urandom), 32'($urandom)};
      model[i] = din; written[i] = 1;
    end
    for (int i = 0; i < 2000; i++) begin
      logic [5:0] ra;
      logic [W-1:0] exp;
      @(negedge clk);
      ra = 6'($urandom);
      raddr = ra;
      exp = model[ra];
      we = 1'($urandom); waddr = 6'($urandom); din = {18'($urandom), 32'($urandom)};
      @(posedge clk);
      if (we) model[waddr] = din;
      #1;
      checks++;
      if (dout != exp) begin failures++; $display("FAIL ra=%0d %h exp %h", ra, dout, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
