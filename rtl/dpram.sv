`timescale 1ps/1ps
// dpram: simple dual-port RAM of the trigger matching logic.
//
// Holds the full measurement (channel, edge, coarse and fine time) at the
// same address as the CAM entry carrying its coarse time. Port A writes
// (we, waddr, din); port B reads with one clock of latency (dout shows the
// word at raddr of the previous clock), as a block RAM with a registered
// read does. The registered read is this design's choice.
module dpram #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 50
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             din,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             dout
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= din;
    dout <= mem[raddr];
  end
endmodule
