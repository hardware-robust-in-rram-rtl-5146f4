// bl_decoder: bit-line decoder of the IRC macro.
//
// Compute mode: raises BL_IN_EN for column col_sel on both sides of every
// group, so each of the 64 sense amplifiers sees one positive and one
// negative bit-line (one output channel per group per operation). Program
// mode: passes the cell pattern of the addressed row to the bit-line drivers
// (bl_prog bit b = 1 forms cell b on the raised word-line) and keeps all
// BL_IN_EN switches open. With en low, all outputs are 0. Combinational.
// The BL_IN_EN<0..15> switches per group are printed in the published
// schematic; using them as a one-of-eight column select is this design's
// reading of the "BL Driver (MUX)" block, which the text does not describe.
module bl_decoder
  import irc_pkg::*;
#(
  parameter int unsigned GROUPS_P      = GROUPS,
  parameter int unsigned BL_PER_SIDE_P = BL_PER_SIDE,
  localparam int unsigned NBL          = 2 * GROUPS_P * BL_PER_SIDE_P,
  localparam int unsigned CW           = (BL_PER_SIDE_P > 1) ? $clog2(BL_PER_SIDE_P) : 1
) (
  input  logic           en,
  input  mode_t          mode,
  input  logic [CW-1:0]  col_sel,    // compute mode: column inside each side
  input  logic [NBL-1:0] prog_data,  // program mode: cells to form on the row
  output logic [NBL-1:0] bl_in_en,   // BL_IN_EN: connect BL to its SA input
  output logic [NBL-1:0] bl_prog     // BL driver: apply forming pulse on BL
);

  always_comb begin
    bl_in_en = '0;
    bl_prog  = '0;
    if (en) begin
      if (mode == MODE_PROGRAM) begin
        bl_prog = prog_data;
      end else begin
        for (int unsigned g = 0; g < GROUPS_P; g++) begin
          bl_in_en[bl_index(g, 32'(col_sel), 1'b0, BL_PER_SIDE_P)] = 1'b1;
          bl_in_en[bl_index(g, 32'(col_sel), 1'b1, BL_PER_SIDE_P)] = 1'b1;
        end
      end
    end
  end

endmodule
