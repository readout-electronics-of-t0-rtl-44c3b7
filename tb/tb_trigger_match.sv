`timescale 1ps/1ps
// tb_trigger_match: one bank's trigger matching fed with measurements whose
// coarse times are chosen here. A reference model keeps what each buffer
// address holds; for every trigger the expected output is every stored
// measurement whose coarse time lies in [T-latency, T-latency+window-1],
// ordered by time point and, within a point, by address, tagged with the
// trigger's event ID and bunch ID. Covered: single and multiple matches,
// measurements outside the window, round-robin overwrite after more than
// DEPTH writes, a short latency whose window reaches past the trigger (the
// search must wait for those measurements), and output back-pressure.
module tb_trigger_match;
  import t0_tdm_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst = 1;
  logic hit_valid = 0, trig_in = 0, out_valid, out_ready = 1, busy, trig_seen, multi_seen;
  hit_t hit = '0;
  match_word_t out_word;
  logic [COARSE_W-1:0] coarse = '0;
  logic [LAT_W-1:0] latency = 48;
  logic [WIN_W-1:0] window = 24;
  int checks = 0, failures = 0, n_out = 0, n_multi_pts = 0;
  hit_t mem [DEPTH];
  bit   vld [DEPTH];
  int   wa = 0, ev = 0;
  match_word_t expq [$];
  longint first_out_time = -1;

  trigger_match #(.DEPTH(DEPTH)) dut (.clk, .rst, .hit_valid, .hit, .trig_in,
    .coarse_time(coarse), .latency, .window, .out_valid, .out_word, .out_ready,
    .busy, .trig_seen, .multi_seen);
  always #5 clk = ~clk;
  always_ff @(posedge clk) coarse <= rst ? '0 : coarse + 1'b1;

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    n_out++;
    if (first_out_time < 0) first_out_time = longint'(coarse);
    if (expq.size() == 0 || out_word != expq[0]) begin
      failures++;
      $display("FAIL out ev=%0d b=%0d ch=%0d c=%0d f=%0d", out_word.event_id, out_word.bunch_id, out_word.hit.channel, out_word.hit.coarse, out_word.hit.fine);
      if (expq.size()) $display("     exp ev=%0d b=%0d ch=%0d c=%0d f=%0d", expq[0].event_id, expq[0].bunch_id, expq[0].hit.channel, expq[0].hit.coarse, expq[0].hit.fine);
    end
    if (expq.size()) void'(expq.pop_front());
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(longint c);
    @(negedge clk);
    hit_valid = 1;
    hit.channel = 5'($urandom % 24);
    hit.edge_kind = edge_e'($urandom % 2);
    hit.coarse = COARSE_W'(c);
    hit.fine = 8'($urandom % 141);
    mem[wa] = hit; vld[wa] = 1;
    wa = (wa + 1) % DEPTH;
    @(negedge clk);
    hit_valid = 0;
  endtask

  // fire the trigger so that it is recorded with time T, return T
  task automatic fire(output longint t, input bit expect_now);
    @(posedge clk); #1;
    trig_in = 1;
    t = longint'(coarse) + 2;
    if (expect_now) expect_event(t);
    repeat (4) @(posedge clk);
    #1 trig_in = 0;
  endtask

  task automatic expect_event(longint t);
    longint lo = t - longint'(latency);
    longint hi = lo + longint'(window) - 1;
    for (longint p = lo; p <= hi; p++) begin
      int n = 0;
      for (int a = 0; a < DEPTH; a++) if (vld[a] && longint'(mem[a].coarse) == p) begin
        match_word_t w;
        w.event_id = EVENT_W'(ev);
        w.bunch_id = BUNCH_W'(t / 6);
        w.hit = mem[a];
        expq.push_back(w);
        n++;
      end
      if (n > 1) n_multi_pts++;
    end
    ev++;
  endtask

  task automatic wait_done();
    int cyc = 0;
    do begin @(negedge clk); cyc++; end while ((busy || expq.size() > 0) && cyc < 5000);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d words missing", expq.size()); end
  endtask

  initial begin
    longint t;
    for (int a = 0; a < DEPTH; a++) vld[a] = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // 1: 40 measurements around the window, several sharing a coarse time
    while (coarse < 900) @(posedge clk);
    for (int i = 0; i < 40; i++) put(940 + $urandom % 50);
    put(960); put(960); put(960);
    put(954); put(955); put(978); put(979);   // both window boundaries (T = 1003)
    while (coarse < 999) @(posedge clk);
    fire(t, 1);
    checks++;
    if (t != 1003) begin failures++; $display("FAIL trigger time %0d", t); end
    wait_done();
    // 2: same buffer, back-pressure on the output
    fork
      begin
        fire(t, 1);           // window now far after the stored data
      end
    join
    wait_done();
    // 3: 100 more writes, only the last DEPTH are kept
    for (int i = 0; i < 100; i++) put(longint'(coarse) - 30 + $urandom % 10);
    fire(t, 1);
    fork
      wait_done();
      repeat (300) begin @(negedge clk); out_ready = 1'($urandom % 2); end
    join
    out_ready = 1;
    // 4: short latency, window extends past the trigger
    latency = 10;
    fire(t, 0);
    for (int i = 0; i < 10; i++) put(t + $urandom % 14);   // stored after the trigger
    first_out_time = -1;
    expect_event(t);
    wait_done();
    checks++;
    if (first_out_time <= t - 10 + 24 - 1 + 16) begin
      failures++; $display("FAIL search started before the window closed (%0d)", first_out_time);
    end
    checks++;
    if (n_multi_pts == 0 || !multi_seen || n_out < 20) begin
      failures++; $display("FAIL coverage multi=%0d out=%0d", n_multi_pts, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
