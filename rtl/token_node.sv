`timescale 1ps/1ps
// token_node: token processing logic of one channel (or one bank) of a
// token ring.
//
// A one-clock pulse on token_in hands the token to this node. While it holds
// the token the node pops its source FIFO (src_rd) whenever the common path
// can take a word (sink_ready), so all data of the source goes out; once the
// FIFO is empty it releases the token with a one-clock pulse on token_out.
// A node whose FIFO is empty therefore passes the token on one clock after
// receiving it. This behaviour follows the original design; the pulse
// interface and one-clock hop are this design's choices.
module token_node (
  input  logic clk,
  input  logic rst,
  input  logic token_in,
  input  logic src_empty,
  input  logic sink_ready,
  output logic src_rd,
  output logic token_out,
  output logic holding
);
  always_ff @(posedge clk) begin
    if (rst)            holding <= 1'b0;
    else if (token_in)  holding <= 1'b1;
    else if (token_out) holding <= 1'b0;
  end
  assign src_rd    = holding && !src_empty && sink_ready;
  assign token_out = holding && src_empty;
endmodule
