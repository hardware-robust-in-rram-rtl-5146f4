// rram_array: behavioural model of the 1024 x 1024 1T1R RRAM cell array with
// its bit-line switches (BL_IN_EN) and the two summing nodes of each group.
//
// BEHAVIOURAL MODEL: the real part is an analog array in an embedded-RRAM
// process. Each cell holds a current gain in units of 1/32 of a nominal LRS
// cell (about 1 uA at the 0.44 V word-line level): 0 for HRS (never formed,
// > 1 GOhm, no current) and a positive value for LRS. When a cell is formed,
// its gain is drawn once from a log-normal distribution with median 1 and
// sigma VAR_SIGMA_MILLI/1000 of ln(current) (0.42 measured for the published
// macro), rounded to 1/32 and clamped to 1/32 .. 255/32; with
// VAR_SIGMA_MILLI = 0 every LRS cell is exactly one unit. This is the
// published device-variation model: a fixed random mask on the cell currents.
//
// Programming: while prog_en is high, at the clock edge every unformed cell
// at the crossing of a raised word-line and a bit-line with bl_prog = 1 is
// formed. Forming is one-time: a formed cell keeps its gain and never returns
// to HRS, because the published design uses the unformed state as HRS. A
// fresh array is all HRS. The random draws come from the simulator's random
// generator, seeded by SEED. The draw uses real arithmetic, so this model is
// for simulation only.
//
// Compute: while sense is high, at the clock edge, each group g registers
// cur_pos[g], the summed gain of LRS cells on raised word-lines over the G+
// bit-lines whose BL_IN_EN is 1, and cur_neg[g] likewise for G-, both in
// 1/32-cell units. Several enabled bit-lines on one side sum, as the shared
// node in the schematic implies. Latency: one clock from sense to outputs.
//
// Not modelled: IR drop along the bit-line (published only as a plotted
// curve) and the current nonlinearity, which the sense-amplifier model
// (tmcsa) applies to the summed current.
module rram_array
  import irc_pkg::*;
#(
  parameter int unsigned ROWS_P          = ROWS,
  parameter int unsigned GROUPS_P        = GROUPS,
  parameter int unsigned BL_PER_SIDE_P   = BL_PER_SIDE,
  parameter int unsigned VAR_SIGMA_MILLI_P = VAR_SIGMA_MILLI,
  parameter int unsigned SEED            = 1,
  localparam int unsigned NBL            = 2 * GROUPS_P * BL_PER_SIDE_P,
  localparam int unsigned CUR_W          = $clog2(ROWS_P * BL_PER_SIDE_P * (2**GAIN_W - 1) + 1)
) (
  input  logic                             clk,
  input  logic                             prog_en,
  input  logic [ROWS_P-1:0]                wl,
  input  logic [NBL-1:0]                   bl_prog,
  input  logic                             sense,
  input  logic [NBL-1:0]                   bl_in_en,
  output logic [GROUPS_P-1:0][CUR_W-1:0]   cur_pos,
  output logic [GROUPS_P-1:0][CUR_W-1:0]   cur_neg
);

  // gain[b][r]: cell on bit-line b, word-line r; 0 = HRS.
  logic [GAIN_W-1:0] gain [NBL][ROWS_P];

  // One log-normal draw (Box-Muller), in 1/GAIN_ONE units.
  function automatic logic [GAIN_W-1:0] draw_gain();
    real u1, u2, z, g;
    if (VAR_SIGMA_MILLI_P == 0) return GAIN_W'(GAIN_ONE);
    u1 = (real'($urandom % 1000000) + 0.5) / 1000000.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    z  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    g  = real'(GAIN_ONE) * $exp(real'(VAR_SIGMA_MILLI_P) / 1000.0 * z) + 0.5;
    if (g < 1.0) g = 1.0;
    if (g > real'(2**GAIN_W - 1)) g = real'(2**GAIN_W - 1);
    return GAIN_W'($rtoi(g));
  endfunction

  initial begin
    void'($urandom(SEED));
    for (int b = 0; b < int'(NBL); b++)
      for (int r = 0; r < int'(ROWS_P); r++) gain[b][r] = '0;  // unformed die: all HRS
  end

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int unsigned r = 0; r < ROWS_P; r++)
        if (wl[r])
          for (int unsigned b = 0; b < NBL; b++)
            if (bl_prog[b] && gain[b][r] == '0) gain[b][r] <= draw_gain();
    end
  end

  always_ff @(posedge clk) begin
    if (sense) begin
      for (int unsigned g = 0; g < GROUPS_P; g++) begin
        int unsigned sp, sn;  // loop indices bp/bn use only their low bits
        sp = 0;
        sn = 0;
        for (int unsigned k = 0; k < BL_PER_SIDE_P; k++) begin
          int unsigned bp, bn;
          bp = bl_index(g, k, 1'b0, BL_PER_SIDE_P);
          bn = bl_index(g, k, 1'b1, BL_PER_SIDE_P);
          if (bl_in_en[bp])
            for (int unsigned r = 0; r < ROWS_P; r++) if (wl[r]) sp += int'(gain[bp][r]);
          if (bl_in_en[bn])
            for (int unsigned r = 0; r < ROWS_P; r++) if (wl[r]) sn += int'(gain[bn][r]);
        end
        cur_pos[g] <= CUR_W'(sp);
        cur_neg[g] <= CUR_W'(sn);
      end
    end
  end

  // Forming and sensing are separate operations.
  a_no_prog_during_sense: assert property (@(posedge clk) !(prog_en && sense));

endmodule
