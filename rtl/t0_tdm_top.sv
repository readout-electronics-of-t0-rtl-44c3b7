`timescale 1ps/1ps
// t0_tdm_top: FPGA logic of one time digitization module (TDM) of the T0
// detector readout - 24 TDC channels measuring leading and trailing edges of
// the front-end TOT pulses, self-trigger preprocessing, trigger matching and
// readout through a two-level token ring.
//
// Structure:
//   hits[i] -> tdl_carry_chain (70 CARRY4, behavioural) -> tdc_channel i
//   channels 0-7, 8-15, 16-23 form banks 0, 1, 2 (tdc_bank): channel FIFOs ->
//     first-level token ring -> trigger matching -> bank FIFO
//   bank FIFOs -> second-level token ring -> readout FIFO -> ro_* port (to the
//     CPLD that holds the PXI interface)
//   all channels' pulse detectors -> trigger_preproc -> event_flag (to the
//     sub-trigger module)
//   trig_front (front-panel LEMO) or trig_back (PXI star trigger bus),
//     chosen by trig_sel, -> trigger matching of every bank
// One 36-bit coarse counter at 240 MHz is the time base of all channels and
// of the trigger time. Everything runs on clk (240 MHz); in the original
// design the FIFO/DPRAM/CAM side runs at 96 MHz and the bunch counter at
// 40 MHz from an FPGA clock manager, which is not modelled here.
// latency and window are the trigger latency and matching window registers
// in coarse clocks (4.17 ns): 48 and 24 give the experiment's 200 ns and
// 100 ns. For a 16-channel internal-MRPC module bank 2 is simply left idle.
// Status outputs of the banks, of the second ring and the readout FIFO count
// (bank_multi, bank_trig, r_busy, r_tok, ro_cnt) are kept as named wires for
// debugging but nothing reads them; lint lists them as unused.
module t0_tdm_top
  import t0_tdm_pkg::*;
#(
  parameter int unsigned N_BANKS       = 3,
  parameter int unsigned N_CARRY4      = 70,
  parameter int unsigned TAP_PS        = 16,
  parameter int unsigned RO_FIFO_DEPTH = 256
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [N_BANKS*CH_PER_BANK-1:0] hits,
  input  logic                         trig_front,
  input  logic                         trig_back,
  input  logic                         trig_sel,
  input  logic                         ext_mode,
  input  logic [LAT_W-1:0]             latency,
  input  logic [WIN_W-1:0]             window,
  output logic                         event_flag,
  input  logic                         ro_rd,
  output match_word_t                  ro_dout,
  output logic                         ro_empty,
  output logic                         ro_overflow,
  output logic [COARSE_W-1:0]          coarse_time
);
  localparam int unsigned N_CH = N_BANKS*CH_PER_BANK;

  // coarse time counter
  always_ff @(posedge clk) begin
    if (rst) coarse_time <= '0;
    else     coarse_time <= coarse_time + 1'b1;
  end

  // trigger source selection
  logic trig;
  assign trig = trig_sel ? trig_back : trig_front;

  // delay lines
  logic [4*N_CARRY4-1:0] co [N_CH];
  for (genvar i = 0; i < N_CH; i++) begin : g_tdl
    tdl_carry_chain #(.N_CARRY4(N_CARRY4), .TAP_PS(TAP_PS)) u_tdl (.hit(hits[i]), .co(co[i]));
  end

  // banks
  logic [N_CH-1:0]    hit_pulse;
  logic [N_BANKS-1:0] bank_rd, bank_empty, bank_ovf, bank_multi, bank_trig;
  match_word_t        bank_dout [N_BANKS];
  logic [MATCH_W-1:0] bank_bits [N_BANKS];
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [4*N_CARRY4-1:0] bco [CH_PER_BANK];
    for (genvar i = 0; i < CH_PER_BANK; i++) begin : g_map
      assign bco[i] = co[b*CH_PER_BANK + i];
    end
    tdc_bank #(.N_CH(CH_PER_BANK), .N_CARRY4(N_CARRY4), .BANK_ID(b)) u_bank (
      .clk, .rst, .co(bco), .coarse_time, .trig_in(trig), .latency, .window,
      .hit_pulse(hit_pulse[b*CH_PER_BANK +: CH_PER_BANK]),
      .bank_rd(bank_rd[b]), .bank_dout(bank_dout[b]), .bank_empty(bank_empty[b]),
      .overflow(bank_ovf[b]), .multi_seen(bank_multi[b]), .trig_seen(bank_trig[b]));
    assign bank_bits[b] = bank_dout[b];
  end

  // self-trigger
  trigger_preproc #(.N_CH(N_CH)) u_pre (.clk, .rst, .ext_mode, .hit_pulse, .event_flag);

  // second-level token ring and readout FIFO
  logic               ro_full, r_valid, r_busy;
  logic [MATCH_W-1:0] r_data;
  logic [N_BANKS-1:0] r_tok;
  token_ring #(.N(N_BANKS), .W(MATCH_W)) u_ring (
    .clk, .rst, .src_empty(bank_empty), .src_data(bank_bits), .src_rd(bank_rd),
    .sink_ready(!ro_full), .sink_valid(r_valid), .sink_data(r_data),
    .token_pos(r_tok), .busy(r_busy));

  logic [$clog2(RO_FIFO_DEPTH):0] ro_cnt;
  logic ro_fifo_ovf;
  sync_fifo #(.W(MATCH_W), .DEPTH(RO_FIFO_DEPTH)) u_ro_fifo (
    .clk, .rst, .wr_en(r_valid), .din(r_data), .full(ro_full),
    .rd_en(ro_rd), .dout(ro_dout), .empty(ro_empty), .count(ro_cnt),
    .overflow(ro_fifo_ovf));
  assign ro_overflow = ro_fifo_ovf || (|bank_ovf);
endmodule
