`timescale 1ps/1ps
// tdc_channel: one tapped-delay-line TDC channel measuring both edges of the
// TOT (time over threshold) hit pulse in a single carry chain.
//
// Each CARRY4 of the delay line feeds three flip-flops: LE1 from CO1, LE2 from
// CO3 and TE1 from CO3 through an XOR with '1' (an inverter). The LE samples
// form the leading-edge thermometer code (2*N_CARRY4 bits); the inverted TE
// samples turn the falling edge into a rising one and form the trailing-edge
// code (N_CARRY4 bits). The LE1/TE1/LE2 split follows the original design; which
// CO output feeds LE2 is this design's choice.
//
// Timing (clk = 240 MHz coarse clock):
//   edge k   the flip-flop array samples the taps; the coarse counter takes
//            the value C at the same edge
//   cycle k  edge detection compares the sample with the previous one: a 0->1
//            change of the first LE tap marks a leading edge, of the first TE
//            tap a trailing edge; the MUX steers that code into the encoder
//   edge k+1 {channel, edge, coarse=C, fine} is registered
//   edge k+2 the word is in the channel FIFO (empty falls)
// fine = number of taps the edge passed before sampling edge k, so the hit
// edge happened fine*tau before the clock edge at which the counter became C.
// FEE pulses are >= 12 ns long, so both edges never fall into the same
// 4.17 ns cycle; should they, the leading edge is kept.
// hit_pulse is the per-channel pulse detector used by the self-trigger logic:
// one cycle high for every detected leading edge.
module tdc_channel
  import t0_tdm_pkg::*;
#(
  parameter int unsigned N_CARRY4   = 70,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned CH_ID      = 0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [4*N_CARRY4-1:0] co,
  input  logic [COARSE_W-1:0]   coarse_time,
  output logic                  hit_pulse,
  input  logic                  fifo_rd,
  output hit_t                  fifo_dout,
  output logic                  fifo_empty,
  output logic                  fifo_overflow
);
  localparam int unsigned LW = 2*N_CARRY4;  // leading code width
  localparam int unsigned TW = N_CARRY4;    // trailing code width

  logic [LW-1:0] le_tap, le_s1;
  logic [TW-1:0] te_tap, te_s1;
  logic          le_prev0, te_prev0;

  // tap selection: LE1 = CO1, LE2 = CO3, TE1 = CO3 XOR 1
  always_comb begin
    for (int unsigned k = 0; k < N_CARRY4; k++) begin
      le_tap[2*k]   = co[4*k];
      le_tap[2*k+1] = co[4*k+2];
      te_tap[k]     = co[4*k+2] ^ 1'b1;
    end
  end

  // D flip-flop array
  always_ff @(posedge clk) begin
    le_s1 <= le_tap;
    te_s1 <= te_tap;
  end

  // edge detection on the first tap of each code; the previous-sample
  // registers follow the line during reset too, so no edge is reported
  // when reset ends (the idle trailing code is all ones)
  logic le_det, te_det;
  always_ff @(posedge clk) begin
    le_prev0 <= le_s1[0];
    te_prev0 <= te_s1[0];
  end
  assign le_det = !rst && le_s1[0] && !le_prev0;
  assign te_det = !rst && te_s1[0] && !te_prev0 && !le_det;

  // code MUX and encoder (one encoder for both codes)
  logic [LW-1:0]     mux_code;
  logic [FINE_W-1:0] fine;
  always_comb mux_code = le_det ? le_s1 : LW'(te_s1);
  thermo_encoder #(.W(LW), .OUT_W(FINE_W)) u_enc (.code(mux_code), .count(fine));

  // coarse capture; result written one cycle later
  logic wr_q;
  hit_t word_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      wr_q <= 1'b0;
    end else begin
      wr_q <= le_det || te_det;
    end
    word_q.channel   <= CH_W'(CH_ID);
    word_q.edge_kind <= le_det ? EDGE_LEADING : EDGE_TRAILING;
    word_q.coarse    <= coarse_time;
    word_q.fine      <= fine;
  end

  assign hit_pulse = le_det;

  logic unused_full;
  logic [$clog2(FIFO_DEPTH):0] unused_cnt;
  sync_fifo #(.W(HIT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .wr_en(wr_q), .din(word_q), .full(unused_full),
    .rd_en(fifo_rd), .dout(fifo_dout), .empty(fifo_empty), .count(unused_cnt),
    .overflow(fifo_overflow)
  );
endmodule
