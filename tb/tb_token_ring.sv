`timescale 1ps/1ps
// tb_token_ring: eight source FIFOs modelled here. Each round preloads random
// amounts of data (one source much fuller than the others), then checks that
// the common path carries source 0's data, then source 1's, ... in FIFO
// order, with random back-pressure; that only one node holds the token; that
// the token returns and the ring goes idle; and, with no back-pressure, that
// the round takes exactly words + N + 1 clocks.
module tb_token_ring;
  localparam int N = 8, W = 16, QD = 64;
  logic clk = 0, rst = 1;
  logic [N-1:0] src_empty, src_rd, token_pos;
  logic [W-1:0] src_data [N];
  logic sink_ready = 1, sink_valid, busy;
  logic [W-1:0] sink_data;
  logic [W-1:0] q [N][QD];
  int head [N], tail [N];
  int checks = 0, failures = 0;
  logic [W-1:0] expq [$];

  token_ring #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  always_comb for (int i = 0; i < N; i++) begin
    src_empty[i] = (head[i] == tail[i]);
    src_data[i]  = q[i][head[i] % QD];
  end

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) if (src_rd[i]) head[i] <= head[i] + 1;
    if (!rst) begin
      if (sink_valid) begin
        checks++;
        if (expq.size() == 0 || sink_data != expq[0]) begin
          failures++; $display("FAIL data %h exp %h", sink_data, expq.size() ? expq[0] : '0);
        end
        if (expq.size()) void'(expq.pop_front());
      end
      if (!$onehot0(token_pos)) begin failures++; $display("FAIL token count"); end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic round(bit stall);
    int words = 0, cyc = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      int n = (i == 2) ? 40 : $urandom % 4;
      for (int k = 0; k < n; k++) begin
        logic [W-1:0] d = W'({i[3:0], 12'($urandom)});
        q[i][tail[i] % QD] = d;
        tail[i]++;
        expq.push_back(d);
        words++;
      end
    end
    do begin
      sink_ready = stall ? 1'($urandom % 3 != 0) : 1'b1;
      @(negedge clk);
      cyc++;
    end while ((busy || expq.size() > 0) && cyc < 2000);
    sink_ready = 1;
    checks++;
    if (expq.size() != 0 || busy) begin failures++; $display("FAIL round left %0d", expq.size()); end
    if (!stall) begin
      checks++;
      // start + one clock per word + one clock per node to release the token
      if (cyc != words + N + 1) begin failures++; $display("FAIL round took %0d clocks, words %0d", cyc, words); end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin head[i] = 0; tail[i] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    round(0);
    for (int r = 0; r < 20; r++) round(r % 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
