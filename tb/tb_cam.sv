`timescale 1ps/1ps
// tb_cam: reproduces the worked CAM example (value A stored once, value B
// stored twice: single and multiple match) and then runs random writes and
// searches against an array model, checking the map and the three flags one
// clock after each search.
module tb_cam;
  localparam int DEPTH = 64, W = 36;
  logic clk = 0, rst = 1;
  logic we = 0, cmp_en = 0;
  logic [5:0] waddr = 0;
  logic [W-1:0] din = 0, cmp_din = 0;
  logic res_valid, match, single_match, multi_match;
  logic [DEPTH-1:0] match_addr;
  logic [W-1:0] model [DEPTH];
  bit valid [DEPTH];
  int checks = 0, failures = 0;

  cam #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int a, logic [W-1:0] d);
    @(negedge clk); we = 1; waddr = 6'(a); din = d;
    @(posedge clk); model[a] = d; valid[a] = 1;
    @(negedge clk); we = 0;
  endtask

  task automatic search(logic [W-1:0] d);
    logic [DEPTH-1:0] exp = '0;
    int n = 0;
    for (int i = 0; i < DEPTH; i++) if (valid[i] && model[i] == d) begin exp[i] = 1; n++; end
    @(negedge clk); cmp_en = 1; cmp_din = d;
    @(negedge clk); cmp_en = 0;
    checks++;
    if (!res_valid || match_addr != exp || match != (n > 0) || single_match != (n == 1) || multi_match != (n > 1)) begin
      failures++;
      $display("FAIL search %h map=%h exp=%h m=%b s=%b mm=%b n=%0d", d, match_addr, exp, match, single_match, multi_match, n);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    search(36'h0);                       // nothing written: no match
    write(6, 36'hA);                     // map '01000000'
    write(5, 36'hB);                     // map '00100001'
    write(0, 36'hB);
    search(36'hA);
    checks++;
    if (match_addr[7:0] != 8'b0100_0000 || !single_match || multi_match) failures++;
    search(36'hB);
    checks++;
    if (match_addr[7:0] != 8'b0010_0001 || single_match || !multi_match) failures++;
    search(36'hC);
    for (int r = 0; r < 1500; r++) begin
      if ($urandom % 2) write($urandom % DEPTH, 36'($urandom % 16));
      else              search(36'($urandom % 20));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
