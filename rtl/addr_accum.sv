`timescale 1ps/1ps
// addr_accum: address accumulator of the trigger matching logic.
//
// Gives the round-robin write address shared by the DPRAM and the CAM: addr
// is the slot the next measurement goes to; after each write (wr high for one
// clock) it advances by one and wraps from DEPTH-1 to 0, so the oldest entry
// is overwritten. The buffer thus always holds the last DEPTH measurements of
// the bank. Reset sets the address to 0. The depth is this design's choice.
module addr_accum #(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr,
  output logic [$clog2(DEPTH)-1:0] addr
);
  always_ff @(posedge clk) begin
    if (rst)     addr <= '0;
    else if (wr) addr <= (addr == ($clog2(DEPTH))'(DEPTH-1)) ? '0 : addr + 1'b1;
  end
endmodule
