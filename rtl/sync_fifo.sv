`timescale 1ps/1ps
// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used as channel FIFO, bank FIFO and readout FIFO of the TDM. dout always
// shows the oldest word while empty is low; rd_en pops it. A write while full
// is dropped and sets the sticky overflow flag; a simultaneous read and write
// when full is accepted. Depths are not given in the original design and are
// chosen per instance. Storage is a plain array (block or distributed RAM).
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  logic [W-1:0]             din,
  output logic                     full,
  input  logic                     rd_en,
  output logic [W-1:0]             dout,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rptr, wptr;
  logic          do_wr, do_rd;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && (!full || do_rd);
  assign dout  = mem[rptr];

  always_ff @(posedge clk) begin
    if (rst) begin
      rptr <= '0; wptr <= '0; count <= '0; overflow <= 1'b0;
    end else begin
      if (do_wr) begin
        mem[wptr] <= din;
        wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      end
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_wr) - ($clog2(DEPTH)+1)'(do_rd);
      if (wr_en && !do_wr) overflow <= 1'b1;
    end
  end

  a_count_in_range: assert property (@(posedge clk) disable iff (rst) count <= ($clog2(DEPTH)+1)'(DEPTH));
endmodule
