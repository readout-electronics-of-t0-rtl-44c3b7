`timescale 1ps/1ps
// trigger_match: trigger matching logic of one bank.
//
// Storage: every measurement arriving from the bank's token ring (hit_valid)
// is written at the address-accumulator address into the DPRAM (whole
// measurement) and into the CAM (its coarse time only); the address then
// advances round-robin, so the last DEPTH measurements are kept.
//
// Matching: Trigger Info queues (trigger time T, bunch ID, event ID) for each
// trigger. For the head trigger the control state machine computes the
// matching window
//     low  = T - latency,   high = low + window - 1   (in coarse clocks),
// waits until the coarse time has passed high by MARGIN clocks (so that hits
// still in the channel FIFOs and token ring have been stored), and then
// searches the CAM once for every coarse time point from low to high. When a
// point matches, the CAM encoder walks the match map one address per step;
// each address is read from the DPRAM and sent out (out_valid/out_ready) with
// the trigger's bunch ID and event ID. A word whose DPRAM entry has been
// overwritten meanwhile (its coarse time no longer equals the point) is
// dropped. Then the trigger is removed and the next one handled.
//
// Timing per trigger: 2 clocks per time point without a match, plus 2 clocks
// per matched word, plus 2 clocks of set-up and clean-up. With the
// experiment's 100 ns window (24 points) an empty event takes about 50 clocks.
// The block structure (Trigger Info, address accumulator, DPRAM, CAM, CAM
// encoder, control with latency and window registers) follows the original
// design; the waiting margin, the walk order, clamping at time 0 and the
// per-word format are this design's choices.
module trigger_match
  import t0_tdm_pkg::*;
#(
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned MARGIN = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                hit_valid,
  input  hit_t                hit,
  input  logic                trig_in,
  input  logic [COARSE_W-1:0] coarse_time,
  input  logic [LAT_W-1:0]    latency,
  input  logic [WIN_W-1:0]    window,
  output logic                out_valid,
  output match_word_t         out_word,
  input  logic                out_ready,
  output logic                busy,
  output logic                trig_seen,
  output logic                multi_seen
);
  localparam int unsigned AW = $clog2(DEPTH);

  // ---------------- storage ----------------
  logic [AW-1:0] waddr;
  addr_accum #(.DEPTH(DEPTH)) u_addr (.clk, .rst, .wr(hit_valid), .addr(waddr));

  logic [AW-1:0] raddr;
  hit_t          rdata;
  dpram #(.DEPTH(DEPTH), .W(HIT_W)) u_ram (
    .clk, .we(hit_valid), .waddr, .din(hit), .raddr, .dout(rdata));

  logic                cmp_en;
  logic [COARSE_W-1:0] cur;
  logic                res_valid, match, single_match, multi_match;
  logic [DEPTH-1:0]    match_map;
  cam #(.DEPTH(DEPTH), .W(COARSE_W)) u_cam (
    .clk, .rst, .we(hit_valid), .waddr, .din(hit.coarse),
    .cmp_en, .cmp_din(cur), .res_valid, .match_addr(match_map),
    .match, .single_match, .multi_match);

  // ---------------- trigger info ----------------
  logic                ti_valid, ti_pop;
  logic [COARSE_W-1:0] ti_time;
  logic [BUNCH_W-1:0]  ti_bunch;
  logic [EVENT_W-1:0]  ti_event;
  trigger_info u_info (
    .clk, .rst, .trig_in, .coarse_time, .pop(ti_pop), .valid(ti_valid),
    .trig_time(ti_time), .bunch_id(ti_bunch), .event_id(ti_event), .trig_seen);

  // ---------------- control ----------------
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_SEARCH, S_RESULT, S_READ, S_OUT, S_DONE} state_e;
  state_e state;

  logic [DEPTH-1:0]    mask;
  logic [COARSE_W-1:0] high;
  logic                enc_found;
  logic [AW-1:0]       enc_addr;
  logic [DEPTH-1:0]    enc_rest;
  cam_encoder #(.DEPTH(DEPTH)) u_enc (.map(mask), .found(enc_found), .addr(enc_addr), .rest(enc_rest));

  // window bounds in signed arithmetic so that an early trigger clamps at 0
  logic signed [COARSE_W+1:0] low_s, high_s;
  always_comb begin
    low_s  = $signed({2'b00, ti_time}) - $signed({{(COARSE_W+2-LAT_W){1'b0}}, latency});
    high_s = low_s + $signed({{(COARSE_W+2-WIN_W){1'b0}}, window}) - 1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      cur   <= '0;
      high  <= '0;
      mask  <= '0;
      multi_seen <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (ti_valid) begin
          if (high_s < 0) begin
            state <= S_DONE;               // empty window
          end else begin
            cur   <= (low_s < 0) ? '0 : COARSE_W'(low_s);
            high  <= COARSE_W'(high_s);
            state <= S_WAIT;
          end
        end
        S_WAIT:   if (coarse_time > high + COARSE_W'(MARGIN)) state <= S_SEARCH;
        S_SEARCH: state <= S_RESULT;
        S_RESULT: begin
          if (match) begin
            mask  <= match_map;
            if (multi_match) multi_seen <= 1'b1;
            state <= S_READ;
          end else if (cur == high) begin
            state <= S_DONE;
          end else begin
            cur   <= cur + 1'b1;
            state <= S_SEARCH;
          end
        end
        S_READ: begin                      // DPRAM reads enc_addr at this edge
          mask  <= enc_rest;
          state <= S_OUT;
        end
        S_OUT: if (out_ready || rdata.coarse != cur) begin
          if (mask != '0)       state <= S_READ;
          else if (cur == high) state <= S_DONE;
          else begin
            cur   <= cur + 1'b1;
            state <= S_SEARCH;
          end
        end
        S_DONE:   state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // the read address is taken from the encoder in S_READ and held while the
  // word waits for out_ready
  logic [AW-1:0] raddr_q;
  always_ff @(posedge clk) raddr_q <= raddr;
  assign raddr     = (state == S_READ) ? enc_addr : raddr_q;
  assign cmp_en    = (state == S_SEARCH);
  assign ti_pop    = (state == S_DONE);
  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUT) && (rdata.coarse == cur);
  always_comb begin
    out_word.event_id = ti_event;
    out_word.bunch_id = ti_bunch;
    out_word.hit      = rdata;
  end

  a_result_after_search: assert property (@(posedge clk) disable iff (rst)
    (state == S_RESULT) |-> res_valid);
  a_read_has_address: assert property (@(posedge clk) disable iff (rst)
    (state == S_READ) |-> enc_found);
  logic unused_single;
  assign unused_single = single_match;
endmodule
