`timescale 1ps/1ps
// tdl_carry_chain: behavioural model of the FPGA tapped delay line.
//
// This is a behavioural model (not synthesizable logic): in the FPGA the line
// is a chain of N_CARRY4 CARRY4 carry primitives placed in consecutive slices,
// and the tap delays are set by the silicon. The hit enters the carry input of
// the first CARRY4 and ripples through 4*N_CARRY4 taps; co[4*k+m] models
// output CO(m+1) of CARRY4 number k. Each tap adds TAP_PS picoseconds, so tap j
// changes (j+1)*TAP_PS after the hit. The line starts at all zeros. 70 CARRY4s follow the original design; a
// uniform 16 ps tap (4480 ps in total, more than one 4167 ps period of the
// 240 MHz coarse clock) is this model's choice - real taps are uneven, which is
// what the measured INL of the TDC reflects.
module tdl_carry_chain #(
  parameter int unsigned N_CARRY4 = 70,
  parameter int unsigned TAP_PS   = 16
) (
  input  logic                  hit,
  output logic [4*N_CARRY4-1:0] co
);
  // every edge of hit starts a process that walks down the line, setting
  // one tap per TAP_PS (transport delay: several edges may be in flight)
  logic [4*N_CARRY4-1:0] line = '0;
  assign co = line;
  always begin
    @(hit);
    fork
      walk(hit);
    join_none
  end

  task automatic walk(input logic level);
    for (int unsigned j = 0; j < 4*N_CARRY4; j++) begin
      #(TAP_PS);
      line[j] = level;
    end
  endtask
endmodule
