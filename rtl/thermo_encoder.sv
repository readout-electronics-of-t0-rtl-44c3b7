`timescale 1ps/1ps
// thermo_encoder: thermometer code to fine-time count.
//
// The sampled delay-line code has a run of ones whose length is the number of
// taps the edge has passed before the sampling clock edge. The encoder counts
// the ones in the code, which also gives a sensible answer when the code has
// a bubble (an isolated out-of-order bit). The original design only says the
// latched code is encoded into an 8-bit fine time; the ones-counter is this
// design's choice. Purely combinational; the caller registers the result.
module thermo_encoder #(
  parameter int unsigned W     = 140,
  parameter int unsigned OUT_W = 8
) (
  input  logic [W-1:0]     code,
  output logic [OUT_W-1:0] count
);
  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < W; i++) count = count + OUT_W'(code[i]);
  end
endmodule
