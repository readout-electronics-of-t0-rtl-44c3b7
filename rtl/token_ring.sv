`timescale 1ps/1ps
// token_ring: one level of the multi-level token ring that moves measurement
// data from N source FIFOs onto one common path.
//
// token_ring_ctrl starts a token at node 0 when any source FIFO is non-empty;
// the token visits node 0, 1, ... N-1 in turn, each node (token_node) emptying
// its FIFO onto the path before passing the token on, and node N-1 returns it
// to the control. Every source thus gets the path once per round whatever the
// others hold. The common path is the OR of the gated head words: sink_valid
// is high for each word popped, and sink_data carries it in the same clock
// (sources are first-word-fall-through FIFOs). sink_ready stalls the node
// holding the token. The same module serves the channel->trigger matching
// level (N = 8 channels) and the bank->readout FIFO level (N = 3 banks).
module token_ring #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 50
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] src_empty,
  input  logic [W-1:0] src_data [N],
  output logic [N-1:0] src_rd,
  input  logic         sink_ready,
  output logic         sink_valid,
  output logic [W-1:0] sink_data,
  output logic [N-1:0] token_pos,
  output logic         busy
);
  logic [N:0] tok;  // tok[i]: token pulse into node i; tok[N]: return
  token_ring_ctrl #(.N(N)) u_ctrl (
    .clk, .rst, .src_empty, .token_ret(tok[N]), .token_start(tok[0]), .busy);

  for (genvar i = 0; i < N; i++) begin : g_node
    token_node u_node (
      .clk, .rst, .token_in(tok[i]), .src_empty(src_empty[i]), .sink_ready,
      .src_rd(src_rd[i]), .token_out(tok[i+1]), .holding(token_pos[i]));
  end

  always_comb begin
    sink_data = '0;
    for (int unsigned i = 0; i < N; i++) sink_data |= src_data[i] & {W{src_rd[i]}};
  end
  assign sink_valid = |src_rd;

  a_one_token: assert property (@(posedge clk) disable iff (rst) $onehot0(token_pos));
endmodule
