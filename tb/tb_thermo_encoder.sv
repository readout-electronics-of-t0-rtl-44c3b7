`timescale 1ps/1ps
// tb_thermo_encoder: checks the fine-time encoder on every clean thermometer
// code of the 140-bit leading code, on the 70-bit trailing code zero-extended,
// and on random codes with bubbles, against a bit count done here.
module tb_thermo_encoder;
  localparam int W = 140;
  logic [W-1:0] code;
  logic [7:0]   count;
  int checks = 0, failures = 0;

  thermo_encoder #(.W(W), .OUT_W(8)) dut (.code, .count);

  function automatic int ones(logic [W-1:0] c);
    int n = 0;
    for (int i = 0; i < W; i++) if (c[i]) n++;
    return n;
  endfunction

  task automatic check(int exp);
    #1;
    checks++;
    if (int'(count) != exp) begin
      failures++;
      $display("FAIL code=%h count=%0d exp=%0d", code, count, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= W; n++) begin
      code = (n == 0) ? '0 : ({W{1'b1}} >> (W - n));
      check(n);
    end
    for (int r = 0; r < 200; r++) begin
      for (int i = 0; i < W; i++) code[i] = 1'($urandom);
      check(ones(code));
    end
    // thermometer with one bubble
    code = {{(W-40){1'b0}}, 40'hFF_FFFF_FFFF};
    code[17] = 1'b0;
    check(39);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
