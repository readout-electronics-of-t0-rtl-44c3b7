`timescale 1ps/1ps
// cam: content-addressed memory of the trigger matching logic.
//
// Each of DEPTH entries holds a W-bit coarse time and a valid bit. Writing:
// with we high, din is stored at waddr (same address as the DPRAM word).
// Searching: with cmp_en high, cmp_din is compared against every valid entry
// in parallel; one clock later res_valid is high and
//   match_addr   has bit i set for every entry i equal to cmp_din,
//   match        is 1 if at least one entry matched,
//   single_match is 1 if exactly one matched,
//   multi_match  is 1 if two or more matched.
// The port set follows the CAM used in the original design; the valid bits
// (cleared by reset so unwritten entries never match) and the registered,
// one-clock search are this design's choices. A search sees the contents as
// they were before a write in the same clock.
module cam #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 36
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             din,
  input  logic                     cmp_en,
  input  logic [W-1:0]             cmp_din,
  output logic                     res_valid,
  output logic [DEPTH-1:0]         match_addr,
  output logic                     match,
  output logic                     single_match,
  output logic                     multi_match
);
  logic [W-1:0]     mem [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [DEPTH-1:0] hit_map;

  always_comb
    for (int unsigned i = 0; i < DEPTH; i++) hit_map[i] = valid[i] && (mem[i] == cmp_din);

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid      <= '0;
      res_valid  <= 1'b0;
      match_addr <= '0;
    end else begin
      if (we) valid[waddr] <= 1'b1;
      res_valid  <= cmp_en;
      match_addr <= cmp_en ? hit_map : '0;
    end
  end

  // at least one / exactly one / more than one bit of the registered map
  always_comb begin
    match        = |match_addr;
    single_match = match && ((match_addr & (match_addr - 1'b1)) == '0);
    multi_match  = match && !single_match;
  end
endmodule
