`timescale 1ps/1ps
// tb_trigger_preproc: self-trigger patterns in both modes.
// Internal mode: any single hit gives an event flag. External mode: a hit at
// one end of a strip gives none; hits at both ends of one strip within the
// coincidence window give one; hits on ends of different strips, or too far
// apart in time, give none. Flag latency (high after the second clock edge that sees the completing hit pulse) and length (FLAG_CYC) are
// checked.
module tb_trigger_preproc;
  localparam int N = 24, EXP = 6, FL = 24;
  logic clk = 0, rst = 1, ext_mode = 0;
  logic [N-1:0] hit_pulse = '0;
  logic event_flag;
  int checks = 0, failures = 0, flags = 0;

  trigger_preproc #(.N_CH(N), .EXPAND_CYC(EXP), .FLAG_CYC(FL)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse channel a at cycle 0 and channel b (if >= 0) 'gap' cycles later;
  // then observe for 60 cycles
  task automatic pattern(bit mode, int a, int b, int gap, bit expect_flag);
    int first = -1, len = 0;
    ext_mode = mode;
    for (int c = 0; c < 60 + gap; c++) begin
      @(negedge clk);
      hit_pulse = '0;
      if (c == 0) hit_pulse[a] = 1'b1;
      if (b >= 0 && c == gap) hit_pulse[b] = 1'b1;
      @(posedge clk); #1;
      if (event_flag) begin
        if (first < 0) first = c;
        len++;
      end
    end
    checks++;
    if (expect_flag) begin
      int last = (b >= 0 && mode) ? gap : 0;
      if (first != last + 1 || len != FL) begin
        failures++; $display("FAIL mode=%0d a=%0d b=%0d gap=%0d first=%0d len=%0d", mode, a, b, gap, first, len);
      end
      flags++;
    end else if (first >= 0) begin
      failures++; $display("FAIL unexpected flag mode=%0d a=%0d b=%0d gap=%0d", mode, a, b, gap);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int ch = 0; ch < N; ch++) pattern(0, ch, -1, 0, 1);      // internal: any hit
    for (int ch = 0; ch < N; ch++) pattern(1, ch, -1, 0, 0);      // external: one end only
    for (int k = 0; k < N/2; k++) pattern(1, 2*k, 2*k+1, k % EXP, 1);  // both ends
    pattern(1, 1, 2, 0, 0);          // ends of two different strips
    pattern(1, 4, 5, EXP + 1, 0);    // both ends but too far apart
    pattern(1, 23, 22, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
