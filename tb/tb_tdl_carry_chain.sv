`timescale 1ps/1ps
// tb_tdl_carry_chain: sends a pulse into the delay-line model and checks that
// tap j switches (j+1)*16 ps after each edge of the pulse and not earlier,
// and that the whole line is longer than one 240 MHz clock period.
module tb_tdl_carry_chain;
  localparam int N = 70, TAP = 16;
  logic hit = 0;
  logic [4*N-1:0] co;
  int checks = 0, failures = 0;

  tdl_carry_chain #(.N_CARRY4(N), .TAP_PS(TAP)) dut (.hit, .co);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    #20000;
    checks++; if (co != '0) failures++;
    hit = 1; t0 = int'($time);
    // sample 8 ps into each tap interval: exactly taps 0..j-1 have switched
    for (int j = 0; j <= 4*N; j++) begin
      #(t0 + j*TAP + 8 - int'($time));
      checks++;
      for (int i = 0; i < 4*N; i++) if (co[i] != (i < j)) begin
        failures++; $display("FAIL rise t=%0d tap %0d=%b", j*TAP + 8, i, co[i]); break;
      end
    end
    checks++; if (4*N*TAP <= 4167) failures++;
    #20000;
    hit = 0; t0 = int'($time);
    for (int j = 0; j <= 4*N; j += 7) begin
      #(t0 + j*TAP + 8 - int'($time));
      checks++;
      for (int i = 0; i < 4*N; i++) if (co[i] != (i >= j)) begin
        failures++; $display("FAIL fall t=%0d tap %0d=%b", j*TAP + 8, i, co[i]); break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
