`timescale 1ps/1ps
// t0_tdm_pkg: widths and record formats shared by the TDM (time digitization
// module) FPGA logic of the T0 detector readout.
//
// A TDC measurement is a 36-bit coarse time from the 240 MHz counter plus an
// 8-bit fine time from the delay-line encoder (both widths as in the original
// design). The edge flag, the 5-bit channel number and the 16-bit bunch and
// event IDs are this design's own choice of format.
// LAT_W, WIN_W, CH_PER_BANK, HIT_W and MATCH_W are published for users of
// the package; the RTL itself may not read all of them.
package t0_tdm_pkg;
  localparam int unsigned COARSE_W   = 36;  // 240 MHz coarse counter
  localparam int unsigned FINE_W     = 8;   // encoded fine time
  localparam int unsigned CH_W       = 5;   // up to 32 channels, 24 used
  localparam int unsigned BUNCH_W    = 16;
  localparam int unsigned EVENT_W    = 16;
  localparam int unsigned LAT_W      = 10;  // latency register, coarse cycles
  localparam int unsigned WIN_W      = 8;   // window register, coarse cycles
  localparam int unsigned CH_PER_BANK = 8;

  typedef enum logic {EDGE_LEADING = 1'b0, EDGE_TRAILING = 1'b1} edge_e;

  // one measurement as stored in channel FIFO, DPRAM and bank path
  typedef struct packed {
    logic [CH_W-1:0]     channel;
    edge_e               edge_kind;
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } hit_t;

  // one matched measurement as delivered to bank FIFO and readout FIFO
  typedef struct packed {
    logic [EVENT_W-1:0]  event_id;
    logic [BUNCH_W-1:0]  bunch_id;
    hit_t                hit;
  } match_word_t;

  localparam int unsigned HIT_W   = $bits(hit_t);
  localparam int unsigned MATCH_W = $bits(match_word_t);
endpackage
