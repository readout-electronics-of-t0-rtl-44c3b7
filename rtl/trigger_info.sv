`timescale 1ps/1ps
// trigger_info: the Trigger Info block of the trigger matching logic.
//
// On each trigger it records three values into three FIFOs:
//   bunch ID  - Counter1, counting 40 MHz ticks since reset,
//   trigger time - Counter2, the 240 MHz coarse time at trigger arrival,
//   event ID  - Counter3, the number of triggers seen before this one.
// The matching control reads the head entry (valid, trig_time, bunch_id,
// event_id) and removes it with pop. The three FIFOs and counters follow the
// original design. This design's choices: the asynchronous trigger level is
// synchronised by two flip-flops and its rising edge is one trigger (so a
// trigger is recorded 3 clocks after it rises); the 40 MHz tick is made by
// dividing the 240 MHz clock by CLK_DIV; Counter2 is the shared coarse counter
// so trigger time and hit times use one time base. A trigger arriving while
// the FIFOs are full is lost (trigger rate is below 10 kHz, so this needs
// DEPTH triggers within one matching operation).
// The three FIFOs move in step, so only their empty flags are read; the
// full, overflow and count outputs (f_*, o_*, c_*) stay unread (a full FIFO
// drops the write by itself) and lint lists them as unused.
module trigger_info
  import t0_tdm_pkg::*;
#(
  parameter int unsigned CLK_DIV = 6,
  parameter int unsigned DEPTH   = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                trig_in,
  input  logic [COARSE_W-1:0] coarse_time,
  input  logic                pop,
  output logic                valid,
  output logic [COARSE_W-1:0] trig_time,
  output logic [BUNCH_W-1:0]  bunch_id,
  output logic [EVENT_W-1:0]  event_id,
  output logic                trig_seen
);
  logic [2:0] sync;
  logic       trig_rise;
  always_ff @(posedge clk) begin
    if (rst) sync <= '0;
    else     sync <= {sync[1:0], trig_in};
  end
  assign trig_rise = sync[1] && !sync[2];

  // Counter1: bunch ID at 40 MHz
  logic [$clog2(CLK_DIV)-1:0] div;
  logic [BUNCH_W-1:0]         bunch_cnt;
  always_ff @(posedge clk) begin
    if (rst) begin
      div <= '0; bunch_cnt <= '0;
    end else if (div == ($clog2(CLK_DIV))'(CLK_DIV-1)) begin
      div <= '0; bunch_cnt <= bunch_cnt + 1'b1;
    end else begin
      div <= div + 1'b1;
    end
  end

  // Counter3: event ID
  logic [EVENT_W-1:0] event_cnt;
  always_ff @(posedge clk) begin
    if (rst)            event_cnt <= '0;
    else if (trig_rise) event_cnt <= event_cnt + 1'b1;
  end
  assign trig_seen = trig_rise;

  logic e_t, e_b, e_e, f_t, f_b, f_e, o_t, o_b, o_e;
  logic [$clog2(DEPTH):0] c_t, c_b, c_e;
  sync_fifo #(.W(COARSE_W), .DEPTH(DEPTH)) u_time_fifo (
    .clk, .rst, .wr_en(trig_rise), .din(coarse_time), .full(f_t),
    .rd_en(pop), .dout(trig_time), .empty(e_t), .count(c_t), .overflow(o_t));
  sync_fifo #(.W(BUNCH_W), .DEPTH(DEPTH)) u_bunch_fifo (
    .clk, .rst, .wr_en(trig_rise), .din(bunch_cnt), .full(f_b),
    .rd_en(pop), .dout(bunch_id), .empty(e_b), .count(c_b), .overflow(o_b));
  sync_fifo #(.W(EVENT_W), .DEPTH(DEPTH)) u_event_fifo (
    .clk, .rst, .wr_en(trig_rise), .din(event_cnt), .full(f_e),
    .rd_en(pop), .dout(event_id), .empty(e_e), .count(c_e), .overflow(o_e));
  assign valid = !e_t;

  // the three FIFOs are written and read together
  a_fifos_in_step: assert property (@(posedge clk) disable iff (rst) (e_t == e_b) && (e_t == e_e));
endmodule
