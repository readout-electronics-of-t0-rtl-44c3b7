`timescale 1ps/1ps
// cam_encoder: turns the CAM's match map (one bit per entry) into binary
// RAM addresses.
//
// Combinational: addr is the index of the lowest set bit of map, found says
// whether any bit is set, and rest is map with that bit cleared. A multiple
// match is thus walked one address per clock by feeding rest back as the next
// map, lowest address first. Map bit i stands for RAM address i. (The worked
// example of the original design counts positions from 1, so its map
// '01000000' names address '111'; here that map names address 6.)
module cam_encoder #(
  parameter int unsigned DEPTH = 64
) (
  input  logic [DEPTH-1:0]         map,
  output logic                     found,
  output logic [$clog2(DEPTH)-1:0] addr,
  output logic [DEPTH-1:0]         rest
);
  always_comb begin
    found = 1'b0;
    addr  = '0;
    for (int i = DEPTH-1; i >= 0; i--) begin
      if (map[i]) begin
        found = 1'b1;
        addr  = ($clog2(DEPTH))'(i);
      end
    end
    rest = map & ~(DEPTH'(found) << addr);
  end
endmodule
