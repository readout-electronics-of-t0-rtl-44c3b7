`timescale 1ps/1ps
// tb_cam_encoder: walks random match maps and the two maps of the worked CAM
// example ('01000000' and '00100001'); every step must give the lowest set
// bit and the map with that bit removed.
module tb_cam_encoder;
  localparam int DEPTH = 64;
  logic [DEPTH-1:0] map, rest;
  logic found;
  logic [5:0] addr;
  int checks = 0, failures = 0;

  cam_encoder #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic walk(logic [DEPTH-1:0] m);
    logic [DEPTH-1:0] cur = m;
    for (int i = 0; i < DEPTH; i++) begin
      if (!cur[i]) continue;
      map = cur; #1;
      checks++;
      if (!found || int'(addr) != i || rest != (cur & ~(64'd1 << i))) begin
        failures++; $display("FAIL map=%h addr=%0d exp=%0d", cur, addr, i);
      end
      cur[i] = 1'b0;
    end
    map = cur; #1;
    checks++;
    if (found) begin failures++; $display("FAIL found on empty map %h", m); end
  endtask

  initial begin
    #1;
    walk(64'b0100_0000);   // single match
    walk(64'b0010_0001);   // multiple match: addresses 0 and 5
    walk('0);
    walk({DEPTH{1'b1}});
    for (int r = 0; r < 100; r++) walk({32'($urandom), 32'($urandom)} & {32'($urandom), 32'($urandom)});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
