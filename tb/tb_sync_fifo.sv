`timescale 1ps/1ps
// tb_sync_fifo: random writes and reads against a queue reference model;
// checks head word, empty, full, count and the sticky overflow flag.
module tb_sync_fifo;
  localparam int W = 12, DEPTH = 8;
  logic clk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] din = '0, dout;
  logic full, empty, overflow;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  bit exp_ovf = 0;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      // phase: mostly writes, then mostly reads, to hit full and empty
      int wp;
      wp = ((i / 200) % 2 == 0) ? 80 : 20;
      @(negedge clk);
      chk(empty == (model.size() == 0), "empty");
      chk(full == (model.size() == DEPTH), "full");
      chk(int'(count) == model.size(), "count");
      chk(overflow == exp_ovf, "overflow");
      if (model.size() > 0) chk(dout == model[0], "head word");
      wr_en = ($urandom % 100) < wp;
      rd_en = ($urandom % 100) < (100 - wp);
      din   = W'($urandom);
      @(posedge clk);
      #1;
      begin
        bit can_rd, can_wr;
        can_rd = rd_en && model.size() > 0;
        can_wr = wr_en && (model.size() < DEPTH || can_rd);
        if (wr_en && !can_wr) exp_ovf = 1;
        if (can_rd) void'(model.pop_front());
        if (can_wr) model.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
