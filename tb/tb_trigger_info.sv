`timescale 1ps/1ps
// tb_trigger_info: sends trigger pulses at random times and checks each
// recorded entry: trigger time = coarse time 2 clocks after the clock that
// first samples the trigger, event ID = trigger number, bunch ID = elapsed
// 240 MHz clocks / 6. Also checks that several queued triggers come out in
// order.
module tb_trigger_info;
  import t0_tdm_pkg::*;
  logic clk = 0, rst = 1, trig_in = 0, pop = 0;
  logic [COARSE_W-1:0] coarse = '0, trig_time;
  logic valid, trig_seen;
  logic [BUNCH_W-1:0] bunch_id;
  logic [EVENT_W-1:0] event_id;
  int checks = 0, failures = 0;
  longint exp_t [$];

  trigger_info dut (.clk, .rst, .trig_in, .coarse_time(coarse), .pop, .valid,
                    .trig_time, .bunch_id, .event_id, .trig_seen);
  always #5 clk = ~clk;
  always_ff @(posedge clk) coarse <= rst ? '0 : coarse + 1'b1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fire();
    @(posedge clk); #1;
    trig_in = 1;
    exp_t.push_back(longint'(coarse) + 2);
    repeat (3 + $urandom % 5) @(posedge clk);
    #1 trig_in = 0;
    repeat (2 + $urandom % 5) @(posedge clk);
  endtask

  task automatic drain();
    int n = 0;
    while (exp_t.size() > 0) begin
      longint t;
      @(negedge clk);
      checks++;
      if (!valid) begin failures++; $display("FAIL no entry"); return; end
      t = exp_t.pop_front();
      if (longint'(trig_time) != t || int'(bunch_id) != int'(t / 6) || int'(event_id) != ev) begin
        failures++;
        $display("FAIL time %0d/%0d bunch %0d/%0d event %0d/%0d", trig_time, t, bunch_id, t/6, event_id, ev);
      end
      ev++;
      pop = 1; @(posedge clk); #1 pop = 0;
    end
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("FAIL leftover entry"); end
  endtask

  int ev = 0;
  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int r = 0; r < 20; r++) begin
      fire();
      if ($urandom % 3 == 0) drain();
      repeat ($urandom % 40) @(posedge clk);
    end
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
