`timescale 1ps/1ps
// tb_t0_tdm_internal_maxlat: the whole TDM at its default size used as the
// 16-channel internal-MRPC module (bank 2 idle, internal self-trigger mode)
// with the maximum trigger latency of 2000 ns (480 coarse clocks) and the
// 100 ns window. Six bursts of TOT pulses on random channels 0-15 are each
// followed, 2000 ns later, by a trigger; two of the triggers come only 8
// clocks apart, so the second is queued in Trigger Info while the first is
// matched and both windows overlap (the same measurements are reported in
// both events). Every event's readout must equal the set of measurements in
// its window; a self-trigger flag must follow every burst.
// The 16-channel configuration, 2000 ns latency and 100 ns window are the
// original system's settings; burst spacing, channel choice and the 8-clock
// trigger pair are this test's own choices.
module tb_t0_tdm_internal_maxlat;
  import t0_tdm_pkg::*;
  localparam int N = 70, TAP = 16, P = 4166, NCH = 24, NEV = 6;
  logic clk = 0, rst = 1;
  logic [NCH-1:0] hits = '0;
  logic trig_front = 0, trig_back = 0, trig_sel = 0, ext_mode = 0, ro_rd = 0;
  logic [LAT_W-1:0] latency = 480;  // 2000 ns
  logic [WIN_W-1:0] window = 24;    // 100 ns
  logic event_flag, ro_empty, ro_overflow;
  match_word_t ro_dout;
  logic [COARSE_W-1:0] coarse_time;
  int checks = 0, failures = 0, flags = 0, done_cnt = 0, queued = 0;

  typedef struct { int ch; bit trailing; longint coarse; int fine; } rec_t;
  rec_t recs [$];
  match_word_t got [$];
  longint trig_t [NEV];

  t0_tdm_top dut (.*);
  always #(P/2) clk = ~clk;

  logic flag_q = 0;
  always @(posedge clk) begin
    flag_q <= event_flag;
    if (event_flag && !flag_q) flags++;
  end

  always @(negedge clk) begin
    ro_rd <= 0;
    if (!ro_empty && !ro_rd) begin got.push_back(ro_dout); ro_rd <= 1; end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  task automatic do_edge(int ch, bit rising, int m);
    longint c0;
    int d, thr;
    rec_t e;
    @(posedge clk); #1;
    c0 = longint'(coarse_time);
    d = 8 + 16*m;
    #(2*P - 1 - d);
    hits[ch] = rising;
    thr = rising ? TAP : 3*TAP;
    e.ch = ch; e.trailing = !rising;
    if (d > thr) begin e.coarse = c0 + 2; e.fine = rising ? le_fine(d) : te_fine(d); end
    else         begin e.coarse = c0 + 3; e.fine = rising ? le_fine(d + P) : te_fine(d + P); end
    recs.push_back(e);
  endtask

  task automatic pulse(int ch);
    repeat ($urandom % 10) @(posedge clk);
    do_edge(ch, 1, $urandom % 260);
    repeat (2 + $urandom % 2) @(posedge clk);
    do_edge(ch, 0, $urandom % 260);
    done_cnt++;
  endtask

  // trigger e fires 'delay' clocks from now
  task automatic fire_at(int e, int delay);
    repeat (delay) @(posedge clk);
    #1 trig_front = 1;
    trig_t[e] = longint'(coarse_time) + 2;
    repeat (3) @(posedge clk);
    #1 trig_front = 0;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (10) @(posedge clk);
    fork
      // bursts about 120 clocks apart; each burst's trigger 483 clocks after
      // it starts, and trigger 3 (no burst of its own) 8 clocks after trigger 2
      for (int e = 0; e < NEV; e++) begin
        automatic int ee = e;
        if (ee == 2) fork begin fire_at(2, 483); fire_at(3, 8); end join_none
        else if (ee != 3) fork fire_at(ee, 483); join_none
        if (ee != 3) begin
          int f0, n, d0;
          f0 = flags; n = 0; d0 = done_cnt;
          for (int c = 0; c < 16; c++) if ($urandom % 3 == 0 || c == ee) begin
            automatic int cc = c;
            fork pulse(cc); join_none
            n++;
          end
          wait (done_cnt == d0 + n);
          repeat (30) @(posedge clk);
          checks++;
          if (flags == f0) begin failures++; $display("FAIL no event flag after burst %0d", ee); end
          repeat (120 - 45) @(posedge clk);
        end
      end
    join
    repeat (1500) @(posedge clk);
    // compare each event's readout with its window
    for (int e = 0; e < NEV; e++) begin
      longint lo, hi;
      rec_t exp_l [$];
      int n_got;
      lo = trig_t[e] - 480;
      hi = lo + 23;
      n_got = 0;
      exp_l.delete();
      foreach (recs[i]) if (recs[i].coarse >= lo && recs[i].coarse <= hi) exp_l.push_back(recs[i]);
      foreach (got[j]) if (int'(got[j].event_id) == e) begin
        int hit_i;
        hit_i = -1;
        n_got++;
        foreach (exp_l[i]) if (hit_i < 0 && int'(got[j].hit.channel) == exp_l[i].ch &&
            got[j].hit.edge_kind == (exp_l[i].trailing ? EDGE_TRAILING : EDGE_LEADING) &&
            longint'(got[j].hit.coarse) == exp_l[i].coarse && int'(got[j].hit.fine) == exp_l[i].fine) hit_i = i;
        checks++;
        if (hit_i < 0 || longint'(got[j].bunch_id) != trig_t[e] / 6 || got[j].hit.channel >= 16) begin
          failures++; $display("FAIL event %0d word ch=%0d c=%0d f=%0d", e, got[j].hit.channel, got[j].hit.coarse, got[j].hit.fine);
        end else exp_l.delete(hit_i);
      end
      checks++;
      if (exp_l.size() != 0 || n_got == 0) begin
        failures++; $display("FAIL event %0d: %0d words, %0d expected words missing", e, n_got, exp_l.size());
      end
      if (e == 3 && n_got > 0) queued++;
    end
    checks++;
    if (queued == 0 || ro_overflow) begin failures++; $display("FAIL queued trigger not served / overflow"); end
    $display("events=%0d words=%0d measurements=%0d", NEV, got.size(), recs.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
