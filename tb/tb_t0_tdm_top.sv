`timescale 1ps/1ps
// tb_t0_tdm_top: end-to-end test of the whole TDM at its default size
// (24 channels, 3 banks, 70 CARRY4 per line). TOT pulses are placed at known
// sub-tap positions on channels of all three banks; expected edge type,
// coarse stamp and fine count are worked out here. It checks the readout FIFO
// contents of each trigger (exactly the in-window measurements, once each,
// with event and bunch ID) and the self-trigger event flag.
// Mechanisms that must each happen at least once:
//   leading and trailing edge words, internal-mode event flag, external-mode
//   strip coincidence flag, external-mode rejection of a one-ended hit,
//   front-panel and backplane trigger, the unselected trigger input ignored,
//   CAM multiple match, measurements outside the window left out, one event
//   carrying words of several banks (second-level token ring).
module tb_t0_tdm_top;
  import t0_tdm_pkg::*;
  localparam int N = 70, TAP = 16, P = 4166, NCH = 24;
  logic clk = 0, rst = 1;
  logic [NCH-1:0] hits = '0;
  logic trig_front = 0, trig_back = 0, trig_sel = 0, ext_mode = 0, ro_rd = 0;
  logic [LAT_W-1:0] latency = 48;   // 200 ns
  logic [WIN_W-1:0] window = 24;    // 100 ns
  logic event_flag, ro_empty, ro_overflow;
  match_word_t ro_dout;
  logic [COARSE_W-1:0] coarse_time;
  int checks = 0, failures = 0, ev = 0, done_cnt = 0, flags = 0;
  int m_le = 0, m_te = 0, m_flag_int = 0, m_flag_ext = 0, m_ext_reject = 0;
  int m_front = 0, m_back = 0, m_ignored = 0, m_multi = 0, m_outside = 0, m_banks = 0;

  typedef struct { int ch; bit trailing; longint coarse; int fine; bit used; } rec_t;
  rec_t recs [$];
  match_word_t got [$];

  t0_tdm_top dut (.*);

  always #(P/2) clk = ~clk;

  logic flag_q = 0;
  always @(posedge clk) begin
    flag_q <= event_flag;
    if (event_flag && !flag_q) flags++;
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
    e.ch = ch; e.trailing = !rising; e.used = 0;
    if (d > thr) begin e.coarse = c0 + 2; e.fine = rising ? le_fine(d) : te_fine(d); end
    else         begin e.coarse = c0 + 3; e.fine = rising ? le_fine(d + P) : te_fine(d + P); end
    recs.push_back(e);
  endtask

  task automatic pulse(int ch, int m1, int m2);
    do_edge(ch, 1, m1);
    repeat (3) @(posedge clk);
    do_edge(ch, 0, m2);
    done_cnt++;
  endtask

  always @(negedge clk) begin
    ro_rd <= 0;
    if (!ro_empty && !ro_rd) begin
      got.push_back(ro_dout);
      ro_rd <= 1;
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // send a trigger on the chosen input; check the readout of one event
  task automatic trigger_and_check(bit back, bit expect_event);
    longint t, lo, hi;
    int n_exp = 0;
    bit [2:0] banks = '0;
    @(posedge clk); #1;
    if (back) trig_back = 1; else trig_front = 1;
    t = longint'(coarse_time) + 2;
    repeat (4) @(posedge clk);
    #1 begin trig_back = 0; trig_front = 0; end
    repeat (400) @(posedge clk);
    if (!expect_event) begin
      chk(got.size() == 0, "unselected trigger input produced data");
      if (got.size() == 0) m_ignored++;
      return;
    end
    lo = t - longint'(latency);
    hi = lo + longint'(window) - 1;
    foreach (recs[i]) if (!recs[i].used) begin
      if (recs[i].coarse >= lo && recs[i].coarse <= hi) n_exp++;
      else m_outside++;
    end
    chk(n_exp > 0, "empty window");
    chk(got.size() == n_exp, $sformatf("event %0d: %0d words, expected %0d", ev, got.size(), n_exp));
    foreach (got[j]) begin
      bit found = 0;
      foreach (recs[i]) if (!recs[i].used && !found && recs[i].coarse >= lo && recs[i].coarse <= hi &&
          int'(got[j].hit.channel) == recs[i].ch && got[j].hit.edge_kind == (recs[i].trailing ? EDGE_TRAILING : EDGE_LEADING) &&
          longint'(got[j].hit.coarse) == recs[i].coarse && int'(got[j].hit.fine) == recs[i].fine) begin
        recs[i].used = 1; found = 1;
      end
      chk(found && int'(got[j].event_id) == ev && longint'(got[j].bunch_id) == t / 6,
          $sformatf("word ch=%0d e=%0d c=%0d f=%0d ev=%0d", got[j].hit.channel, got[j].hit.edge_kind,
                    got[j].hit.coarse, got[j].hit.fine, got[j].event_id));
      if (got[j].hit.edge_kind == EDGE_LEADING) m_le++; else m_te++;
      banks[got[j].hit.channel / 8] = 1'b1;
      for (int k = 0; k < j; k++)
        if (got[k].hit.coarse == got[j].hit.coarse && got[k].hit.channel / 8 == got[j].hit.channel / 8) m_multi++;
    end
    if ($countones(banks) > 1) m_banks++;
    if (back) m_back++; else m_front++;
    // everything older is now out of reach of later windows
    foreach (recs[i]) recs[i].used = 1;
    got.delete();
    ev++;
  endtask

  initial begin
    int f0;
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (10) @(posedge clk);

    // ---- internal mode, front-panel trigger
    ext_mode = 0; trig_sel = 0;
    f0 = flags;
    fork pulse(7, 30, 40); join_none             // early hit, outside the window
    wait (done_cnt == 1);
    repeat (30) @(posedge clk);
    chk(flags == f0 + 1, "internal mode: single hit gives one flag");
    if (flags == f0 + 1) m_flag_int++;
    fork                                          // burst on all banks, ch 4 and 5 in the same clock
      pulse(2, 100, 20);
      pulse(4, 200, 250);
      pulse(5, 50, 3);
      pulse(12, 120, 130);
      pulse(20, 7, 99);
    join
    repeat (28) @(posedge clk);
    trigger_and_check(0, 1);

    // ---- external mode, backplane trigger
    ext_mode = 1; trig_sel = 1;
    f0 = flags;
    pulse(10, 60, 60);                            // one end of strip 5 only
    repeat (40) @(posedge clk);
    chk(flags == f0, "external mode: one-ended hit rejected");
    if (flags == f0) m_ext_reject++;
    trigger_and_check(0, 0);                      // front panel not selected: ignored
    fork
      pulse(10, 140, 33);                         // both ends of strip 5
      pulse(11, 141, 200);
      pulse(17, 80, 80);
    join
    repeat (10) @(posedge clk);
    chk(flags == f0 + 1, "external mode: strip coincidence gives one flag");
    if (flags == f0 + 1) m_flag_ext++;
    repeat (18) @(posedge clk);
    trigger_and_check(1, 1);
    chk(!ro_overflow, "no data lost");

    chk(m_le > 0 && m_te > 0, "leading and trailing edges");
    chk(m_flag_int > 0, "internal flag");
    chk(m_flag_ext > 0, "external coincidence flag");
    chk(m_ext_reject > 0, "external rejection");
    chk(m_front > 0 && m_back > 0, "both trigger inputs");
    chk(m_ignored > 0, "unselected input ignored");
    chk(m_multi > 0, "multiple match");
    chk(m_outside > 0, "out-of-window data left out");
    chk(m_banks > 0, "event from several banks");
    $display("mechanisms: le=%0d te=%0d flag_int=%0d flag_ext=%0d ext_reject=%0d front=%0d back=%0d ignored=%0d multi=%0d outside=%0d multibank=%0d",
             m_le, m_te, m_flag_int, m_flag_ext, m_ext_reject, m_front, m_back, m_ignored, m_multi, m_outside, m_banks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
