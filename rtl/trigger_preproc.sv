`timescale 1ps/1ps
// trigger_preproc: trigger preprocessing (self-trigger) logic of the TDM.
//
// Each channel's pulse detector output (one clock per leading edge) is
// widened by an expander to EXPAND_CYC clocks, which sets the coincidence
// window. Then, depending on ext_mode:
//   ext_mode = 0 (internal MRPC): any expanded hit is a valid event (OR);
//   ext_mode = 1 (external MRPC): channels 2k and 2k+1 are the two ends of
//     strip k; a strip with hits at both ends is a valid event (AND per
//     strip, OR over strips).
// A final pulse detector takes the rising edge of that condition and an
// expander stretches it to FLAG_CYC clocks as event_flag towards the
// sub-trigger module. Structure and the two modes follow the original design;
// the expander lengths (25 ns and 100 ns at 240 MHz) and the pairing of
// channels are this design's choices. Latency: event_flag is high from the
// second clock edge after the hit pulse that completes the condition.
module trigger_preproc #(
  parameter int unsigned N_CH       = 24,
  parameter int unsigned EXPAND_CYC = 6,
  parameter int unsigned FLAG_CYC   = 24
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ext_mode,
  input  logic [N_CH-1:0] hit_pulse,
  output logic            event_flag
);
  localparam int unsigned EW = $clog2(EXPAND_CYC+1);
  localparam int unsigned FW = $clog2(FLAG_CYC+1);

  logic [EW-1:0]   exp_cnt [N_CH];
  logic [N_CH-1:0] expanded;
  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N_CH; i++) begin
      if (rst)               exp_cnt[i] <= '0;
      else if (hit_pulse[i]) exp_cnt[i] <= EW'(EXPAND_CYC);
      else if (exp_cnt[i] != '0) exp_cnt[i] <= exp_cnt[i] - 1'b1;
    end
  end
  always_comb for (int unsigned i = 0; i < N_CH; i++) expanded[i] = (exp_cnt[i] != '0);

  logic cond, cond_q;
  always_comb begin
    cond = 1'b0;
    if (ext_mode) begin
      for (int unsigned k = 0; k < N_CH/2; k++) cond |= expanded[2*k] & expanded[2*k+1];
    end else begin
      cond = |expanded;
    end
  end

  logic [FW-1:0] flag_cnt;
  always_ff @(posedge clk) begin
    if (rst) begin
      cond_q   <= 1'b0;
      flag_cnt <= '0;
    end else begin
      cond_q <= cond;
      if (cond && !cond_q)     flag_cnt <= FW'(FLAG_CYC);
      else if (flag_cnt != '0) flag_cnt <= flag_cnt - 1'b1;
    end
  end
  assign event_flag = (flag_cnt != '0);
endmodule
