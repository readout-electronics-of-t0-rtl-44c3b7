`timescale 1ps/1ps
// tb_tdc_channel: one TDC channel fed by the delay-line model. Pulses of
// 12-17 ns are placed at random sub-tap positions relative to the 240 MHz
// clock; for every edge the expected edge type, coarse stamp and fine count
// are worked out here from the edge time and the 16 ps tap delay, and the
// channel FIFO contents, the hit pulse and the 2-clock write latency are
// checked.
module tb_tdc_channel;
  import t0_tdm_pkg::*;
  localparam int N = 70, TAP = 16, P = 4166;
  logic clk = 0, rst = 1, hit = 0;
  logic [4*N-1:0] co;
  logic [COARSE_W-1:0] coarse = '0;
  logic hit_pulse, fifo_rd = 0, fifo_empty, fifo_overflow;
  hit_t fifo_dout;
  int checks = 0, failures = 0, n_le = 0, n_te = 0, n_pulse = 0;

  typedef struct { bit trailing; longint coarse; int fine; } exp_t;
  exp_t exp_q [$];

  tdl_carry_chain #(.N_CARRY4(N), .TAP_PS(TAP)) u_tdl (.hit, .co);
  tdc_channel #(.N_CARRY4(N), .CH_ID(5)) dut (
    .clk, .rst, .co, .coarse_time(coarse), .hit_pulse, .fifo_rd, .fifo_dout,
    .fifo_empty, .fifo_overflow);

  always #(P/2) clk = ~clk;
  always_ff @(posedge clk) coarse <= rst ? '0 : coarse + 1'b1;
  always_ff @(posedge clk) if (hit_pulse) n_pulse++;

  function automatic int le_fine(int d);
    int n = 0;
    for (int k = 0; k < N; k++) begin
      if ((4*k+1)*TAP < d) n++;
      if ((4*k+3)*TAP < d) n++;
    end
    return n;
  endfunction
  function automatic int te_fine(int d);
    int n = 0;
    for (int k = 0; k < N; k++) if ((4*k+3)*TAP < d) n++;
    return n;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // place an edge 8+16*m ps before the clock edge two cycles ahead
  task automatic do_edge(bit rising, int m);
    longint c0;
    int d, thr;
    exp_t e;
    @(posedge clk); #1;
    c0 = longint'(coarse);
    d = 8 + 16*m;
    #(2*P - 1 - d);
    hit = rising;
    thr = rising ? TAP : 3*TAP;
    e.trailing = !rising;
    if (d > thr) begin e.coarse = c0 + 2; e.fine = rising ? le_fine(d) : te_fine(d); end
    else         begin e.coarse = c0 + 3; e.fine = rising ? le_fine(d + P) : te_fine(d + P); end
    exp_q.push_back(e);
  endtask

  // drain and compare
  always @(negedge clk) begin
    fifo_rd <= 0;
    if (!fifo_empty && !rst) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected word");
      end else begin
        e = exp_q.pop_front();
        if (fifo_dout.channel != 5'd5 || fifo_dout.edge_kind != (e.trailing ? EDGE_TRAILING : EDGE_LEADING) ||
            longint'(fifo_dout.coarse) != e.coarse || int'(fifo_dout.fine) != e.fine) begin
          failures++;
          $display("FAIL got tr=%0d c=%0d f=%0d exp tr=%0d c=%0d f=%0d", fifo_dout.edge_kind,
                   fifo_dout.coarse, fifo_dout.fine, e.trailing, e.coarse, e.fine);
        end
        if (e.trailing) n_te++; else n_le++;
      end
      fifo_rd <= 1;
    end
  end

  // latency: the word is in the FIFO two clocks after the detecting clock edge
  initial begin
    longint c_det;
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (4) @(posedge clk);
    do_edge(1, 100);               // d = 1608 ps, detection at c0+2
    @(posedge clk); #1; c_det = longint'(coarse);  // this is the detecting edge
    checks++; if (!hit_pulse) begin failures++; $display("FAIL hit_pulse"); end
    @(posedge clk); #1;
    checks++; if (!fifo_empty) begin failures++; $display("FAIL too early"); end
    @(posedge clk); #1;
    checks++; if (fifo_empty) begin failures++; $display("FAIL latency"); end
    repeat (3) @(posedge clk);
    do_edge(0, 50);
    repeat (5) @(posedge clk);
    for (int i = 0; i < 60; i++) begin
      do_edge(1, $urandom % 260);
      repeat (3 + $urandom % 2) @(posedge clk);  // pulse 12..17 ns
      do_edge(0, $urandom % 260);
      repeat (2 + $urandom % 4) @(posedge clk);
    end
    // extreme positions: edge just before a clock edge, and a full period
    do_edge(1, 0);  repeat (4) @(posedge clk); do_edge(0, 2);
    repeat (4) @(posedge clk);
    do_edge(1, 259); repeat (4) @(posedge clk); do_edge(0, 259);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_le != 63 || n_te != 63 || n_pulse != 63 || fifo_overflow) begin
      failures++; $display("FAIL counts le=%0d te=%0d pulses=%0d left=%0d", n_le, n_te, n_pulse, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
