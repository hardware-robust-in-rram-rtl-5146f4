// ternary_mapper: turns one word-line's worth of ternary weights into the
// LRS/HRS pattern of the cells on that word-line.
//
// Input is one ternary weight per output channel (tern_t code, 2 bits each).
// Channel c = g * BL_PER_SIDE + k is stored in group g, column k: its +1 part
// goes to the positive bit-line BL[g*2*BL_PER_SIDE + k] and its -1 part to the
// negative bit-line BL[g*2*BL_PER_SIDE + BL_PER_SIDE + k]. A +1 weight forms
// only the G+ cell, a -1 weight only the G- cell, a 0 weight neither, which is
// the published ternary mapping. Output bit b is 1 where cell b must be formed
// to LRS. Purely combinational. The channel-to-column order is this design's
// own choice; the paper shows which bit-lines form G+ and G- but not the order.
module ternary_mapper
  import irc_pkg::*;
#(
  parameter int unsigned GROUPS_P      = GROUPS,
  parameter int unsigned BL_PER_SIDE_P = BL_PER_SIDE
) (
  input  logic [2*GROUPS_P*BL_PER_SIDE_P-1:0] weights,  // channel c at [2c+1:2c]
  output logic [2*GROUPS_P*BL_PER_SIDE_P-1:0] cells     // one bit per bit-line
);

  always_comb begin
    cells = '0;
    for (int unsigned g = 0; g < GROUPS_P; g++) begin
      for (int unsigned k = 0; k < BL_PER_SIDE_P; k++) begin
        cell_pair_t p;
        p = map_ternary(weights[2*(g*BL_PER_SIDE_P+k) +: 2]);
        cells[bl_index(g, k, 1'b0, BL_PER_SIDE_P)] = p.gp;
        cells[bl_index(g, k, 1'b1, BL_PER_SIDE_P)] = p.gn;
      end
    end
  end

endmodule
