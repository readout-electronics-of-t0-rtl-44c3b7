`timescale 1ps/1ps
// token_ring_ctrl: Token Ring Control of a token ring.
//
// Watches the Empty flags of all sources. When idle and any source holds
// data, it issues a one-clock token pulse to the first node and becomes busy;
// when the last node returns the token it is idle again and may start the
// next round in the following clock. Follows the original design; the pulse
// timing is this design's choice.
module token_ring_ctrl #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] src_empty,
  input  logic         token_ret,
  output logic         token_start,
  output logic         busy
);
  always_ff @(posedge clk) begin
    if (rst)              busy <= 1'b0;
    else if (token_start) busy <= 1'b1;
    else if (token_ret)   busy <= 1'b0;
  end
  assign token_start = !busy && !(&src_empty);
endmodule
