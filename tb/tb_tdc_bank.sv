`timescale 1ps/1ps
// tb_tdc_bank: one bank (channels 8-15) with eight delay-line models. Random
// TOT pulses on all channels are placed at known sub-tap positions; the
// expected edge type, coarse stamp and fine count of every edge are worked
// out here. After a trigger, the bank FIFO must hold exactly the measurements
// whose coarse time lies in the matching window, each once, with the
// trigger's event and bunch ID. Two triggers are sent.
module tb_tdc_bank;
  import t0_tdm_pkg::*;
  localparam int N = 70, TAP = 16, P = 4166, NCH = 8;
  logic clk = 0, rst = 1, trig_in = 0, bank_rd = 0;
  logic [NCH-1:0] hits = '0, hit_pulse;
  logic [4*N-1:0] co [NCH];
  logic [COARSE_W-1:0] coarse = '0;
  logic [LAT_W-1:0] latency = 48;
  logic [WIN_W-1:0] window = 24;
  match_word_t bank_dout;
  logic bank_empty, overflow, multi_seen, trig_seen;
  int checks = 0, failures = 0, ev = 0, done_cnt = 0;

  typedef struct { int ch; bit trailing; longint coarse; int fine; bit used; } rec_t;
  rec_t recs [$];
  match_word_t got [$];

  for (genvar i = 0; i < NCH; i++) begin : g_tdl
    tdl_carry_chain #(.N_CARRY4(N), .TAP_PS(TAP)) u_tdl (.hit(hits[i]), .co(co[i]));
  end
  tdc_bank #(.N_CH(NCH), .N_CARRY4(N), .BANK_ID(1)) dut (.*, .coarse_time(coarse));

  always #(P/2) clk = ~clk;
  always_ff @(posedge clk) coarse <= rst ? '0 : coarse + 1'b1;

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
    c0 = longint'(coarse);
    d = 8 + 16*m;
    #(2*P - 1 - d);
    hits[ch] = rising;
    thr = rising ? TAP : 3*TAP;
    e.ch = 8 + ch; e.trailing = !rising; e.used = 0;
    if (d > thr) begin e.coarse = c0 + 2; e.fine = rising ? le_fine(d) : te_fine(d); end
    else         begin e.coarse = c0 + 3; e.fine = rising ? le_fine(d + P) : te_fine(d + P); end
    recs.push_back(e);
  endtask

  task automatic pulses(int ch, int n);
    repeat ($urandom % 8) @(posedge clk);
    for (int i = 0; i < n; i++) begin
      do_edge(ch, 1, $urandom % 260);
      repeat (2 + $urandom % 2) @(posedge clk);
      do_edge(ch, 0, $urandom % 260);
      repeat (2 + $urandom % 6) @(posedge clk);
    end
  endtask

  always @(negedge clk) begin
    bank_rd <= 0;
    if (!bank_empty && !bank_rd) begin
      got.push_back(bank_dout);
      bank_rd <= 1;
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trigger_and_check();
    longint t, lo, hi;
    int n_exp = 0;
    @(posedge clk); #1;
    trig_in = 1;
    t = longint'(coarse) + 2;
    repeat (4) @(posedge clk);
    #1 trig_in = 0;
    repeat (200) @(posedge clk);
    lo = t - longint'(latency);
    hi = lo + longint'(window) - 1;
    foreach (recs[i]) if (recs[i].coarse >= lo && recs[i].coarse <= hi) n_exp++;
    if (n_exp == 0) begin failures++; $display("FAIL empty window %0d..%0d, %0d edges", lo, hi, recs.size()); end
    checks++;
    if (got.size() != n_exp) begin failures++; $display("FAIL event %0d: %0d words, expected %0d", ev, got.size(), n_exp); end
    foreach (got[j]) begin
      bit found = 0;
      checks++;
      foreach (recs[i]) if (!recs[i].used && !found && recs[i].coarse >= lo && recs[i].coarse <= hi &&
          int'(got[j].hit.channel) == recs[i].ch && got[j].hit.edge_kind == (recs[i].trailing ? EDGE_TRAILING : EDGE_LEADING) &&
          longint'(got[j].hit.coarse) == recs[i].coarse && int'(got[j].hit.fine) == recs[i].fine) begin
        recs[i].used = 1; found = 1;
      end
      if (!found || int'(got[j].event_id) != ev || longint'(got[j].bunch_id) != t / 6) begin
        failures++;
        $display("FAIL word ch=%0d e=%0d c=%0d f=%0d ev=%0d", got[j].hit.channel, got[j].hit.edge_kind, got[j].hit.coarse, got[j].hit.fine, got[j].event_id);
      end
    end
    got.delete();
    ev++;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst = 0;
    repeat (10) @(posedge clk);
    fork
      for (int c = 0; c < NCH; c++) begin
        automatic int cc = c;
        fork begin pulses(cc, 3); done_cnt++; end join_none
      end
    join
    wait (done_cnt == NCH);
    repeat (20) @(posedge clk);
    trigger_and_check();
    // second burst: all channels fire in the same clock cycle
    fork
      for (int c = 0; c < NCH; c++) begin
        automatic int cc = c;
        fork begin do_edge(cc, 1, 100 + cc); repeat (3) @(posedge clk); do_edge(cc, 0, 10 * cc); done_cnt++; end join_none
      end
    join
    wait (done_cnt == 2*NCH);
    repeat (24) @(posedge clk);
    trigger_and_check();
    checks++;
    if (!multi_seen || overflow) begin failures++; $display("FAIL multi=%b ovf=%b", multi_seen, overflow); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
