`timescale 1ps/1ps
// tdc_bank: one bank of the TDM - N_CH TDC channels, the first-level token
// ring, the trigger matching block and the bank FIFO.
//
// Measurements leave the channel FIFOs through the token ring (one word per
// clock, channels served in turn) and are stored by the trigger matching
// block; matched words, tagged with bunch and event ID, go into the bank FIFO
// whose read side feeds the second-level token ring in the top. Channel
// numbers are BANK_ID*N_CH + local index. The grouping into banks of 8
// channels follows the original design; FIFO depths are this design's choice.
// The ring position and busy flags and the bank FIFO count (tok_pos,
// tok_busy, m_busy, bank_cnt) are left unread on purpose; lint lists them.
module tdc_bank
  import t0_tdm_pkg::*;
#(
  parameter int unsigned N_CH            = 8,
  parameter int unsigned N_CARRY4        = 70,
  parameter int unsigned BANK_ID         = 0,
  parameter int unsigned CH_FIFO_DEPTH   = 16,
  parameter int unsigned BANK_FIFO_DEPTH = 64,
  parameter int unsigned DEPTH           = 64
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [4*N_CARRY4-1:0] co [N_CH],
  input  logic [COARSE_W-1:0]   coarse_time,
  input  logic                  trig_in,
  input  logic [LAT_W-1:0]      latency,
  input  logic [WIN_W-1:0]      window,
  output logic [N_CH-1:0]       hit_pulse,
  input  logic                  bank_rd,
  output match_word_t           bank_dout,
  output logic                  bank_empty,
  output logic                  overflow,
  output logic                  multi_seen,
  output logic                  trig_seen
);
  logic [N_CH-1:0] ch_empty, ch_rd, ch_ovf;
  hit_t            ch_dout [N_CH];
  logic [HIT_W-1:0] ch_bits [N_CH];

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    tdc_channel #(.N_CARRY4(N_CARRY4), .FIFO_DEPTH(CH_FIFO_DEPTH), .CH_ID(BANK_ID*N_CH + i)) u_ch (
      .clk, .rst, .co(co[i]), .coarse_time, .hit_pulse(hit_pulse[i]),
      .fifo_rd(ch_rd[i]), .fifo_dout(ch_dout[i]), .fifo_empty(ch_empty[i]),
      .fifo_overflow(ch_ovf[i]));
    assign ch_bits[i] = ch_dout[i];
  end

  logic             tm_valid;
  logic [HIT_W-1:0] tm_data;
  logic [N_CH-1:0]  tok_pos;
  logic             tok_busy;
  token_ring #(.N(N_CH), .W(HIT_W)) u_ring (
    .clk, .rst, .src_empty(ch_empty), .src_data(ch_bits), .src_rd(ch_rd),
    .sink_ready(1'b1), .sink_valid(tm_valid), .sink_data(tm_data),
    .token_pos(tok_pos), .busy(tok_busy));

  logic        m_valid, m_ready, m_busy;
  match_word_t m_word;
  trigger_match #(.DEPTH(DEPTH)) u_match (
    .clk, .rst, .hit_valid(tm_valid), .hit(hit_t'(tm_data)), .trig_in, .coarse_time,
    .latency, .window, .out_valid(m_valid), .out_word(m_word), .out_ready(m_ready),
    .busy(m_busy), .trig_seen, .multi_seen);

  logic bank_full, bank_ovf;
  logic [$clog2(BANK_FIFO_DEPTH):0] bank_cnt;
  sync_fifo #(.W(MATCH_W), .DEPTH(BANK_FIFO_DEPTH)) u_bank_fifo (
    .clk, .rst, .wr_en(m_valid && m_ready), .din(m_word), .full(bank_full),
    .rd_en(bank_rd), .dout(bank_dout), .empty(bank_empty), .count(bank_cnt),
    .overflow(bank_ovf));
  assign m_ready  = !bank_full;
  assign overflow = bank_ovf || (|ch_ovf);
endmodule
