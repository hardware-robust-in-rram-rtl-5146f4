// irc_macro: the hardware-robust in-RRAM-computing macro (top level).
//
// One 1024 x 1024 RRAM array evaluates 64 binary-activation output channels
// per operation. Every output channel is a ternary-weight, batch-norm-free
// 3x3x60 convolution: its 540 weights sit on word-lines 32..571 and its extra
// bias on word-lines 0..31, both as (G+, G-) cell pairs, one column pair per
// channel. A compute operation raises all those word-lines at once (the bias
// rows with input 1, the kernel rows with the binary input feature), connects
// column req_col of both sides of every group to that group's sense
// amplifier, and returns one activation per group: 1 where the positive
// current exceeds the negative one. Column c of group g holds output channel
// g*8+c, so the 512 channels stored take 8 operations on one input.
//
// Programming writes one word-line per request: req_weights carries one
// ternary weight per channel (2 bits each, tern_t), which the ternary mapper
// turns into the LRS/HRS cells of that row. Forming is one-time, as in the
// published design.
//
// Interface: valid/ready request, response with rsp_valid (see irc_ctrl for
// cycle timing: program 2 cycles per row, compute 3 cycles to response).
// rsp_resolved marks, per group, that the sense amplifier model could resolve
// the comparison; it is a model observation, not a pin of the real macro.
// Parameters default to the published macro. NONIDEAL = 0 makes the sense
// amplifiers ideal comparators, VAR_SIGMA_MILLI_P sets the cell variation
// (sigma of ln(current) in thousandths, 420 published, 0 = none), and
// SA_MARGIN_ADD widens the sense-amplifier margin by whole cells, as in the
// published tolerance sweep.
// The analog word-line driver, bit-line clamps and the on-chip analog bias
// generation have no logic function and are not modelled.
module irc_macro
  import irc_pkg::*;
#(
  parameter int unsigned ROWS_P        = ROWS,
  parameter int unsigned BIAS_ROWS_P   = BIAS_ROWS,
  parameter int unsigned CONV_ROWS_P   = CONV_ROWS,
  parameter int unsigned GROUPS_P      = GROUPS,
  parameter int unsigned BL_PER_SIDE_P = BL_PER_SIDE,
  parameter bit          NONIDEAL      = 1'b1,
  parameter int unsigned VAR_SIGMA_MILLI_P = VAR_SIGMA_MILLI,
  parameter int unsigned SA_MARGIN_ADD = 0,
  localparam int unsigned AW           = $clog2(ROWS_P),
  localparam int unsigned CW           = (BL_PER_SIDE_P > 1) ? $clog2(BL_PER_SIDE_P) : 1,
  localparam int unsigned NCH          = GROUPS_P * BL_PER_SIDE_P,
  localparam int unsigned NBL          = 2 * NCH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  mode_t                  req_op,
  input  logic [AW-1:0]          req_row,
  input  logic [2*NCH-1:0]       req_weights,
  input  logic [CW-1:0]          req_col,
  input  logic [CONV_ROWS_P-1:0] req_feat,
  output logic                   rsp_valid,
  output logic [GROUPS_P-1:0]    rsp_act,
  output logic [GROUPS_P-1:0]    rsp_resolved
);

  localparam int unsigned CUR_W = $clog2(ROWS_P * BL_PER_SIDE_P * (2**GAIN_W - 1) + 1);

  logic [NBL-1:0]                 row_cells;
  logic                           dec_en, prog_en, sense, sa_en;
  mode_t                          dec_mode;
  logic [AW-1:0]                  dec_row;
  logic [NBL-1:0]                 dec_cells;
  logic [CW-1:0]                  dec_col;
  logic [CONV_ROWS_P-1:0]         dec_feat;
  logic [ROWS_P-1:0]              wl;
  logic [NBL-1:0]                 bl_in_en, bl_prog;
  logic [GROUPS_P-1:0][CUR_W-1:0] cur_pos, cur_neg;
  logic [GROUPS_P-1:0]            sa_out, sa_resolved;

  ternary_mapper #(.GROUPS_P(GROUPS_P), .BL_PER_SIDE_P(BL_PER_SIDE_P)) u_map (
    .weights (req_weights),
    .cells   (row_cells)
  );

  irc_ctrl #(
    .ROWS_P(ROWS_P), .CONV_ROWS_P(CONV_ROWS_P),
    .GROUPS_P(GROUPS_P), .BL_PER_SIDE_P(BL_PER_SIDE_P)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_row,
    .req_cells (row_cells),
    .req_col, .req_feat,
    .rsp_valid, .rsp_act, .rsp_resolved,
    .dec_en, .dec_mode, .dec_row, .dec_cells, .dec_col, .dec_feat,
    .prog_en, .sense, .sa_en,
    .sa_out, .sa_resolved
  );

  wl_decoder #(.ROWS_P(ROWS_P), .BIAS_ROWS_P(BIAS_ROWS_P), .CONV_ROWS_P(CONV_ROWS_P)) u_wldec (
    .en (dec_en), .mode (dec_mode), .row_addr (dec_row), .feat (dec_feat), .wl
  );

  bl_decoder #(.GROUPS_P(GROUPS_P), .BL_PER_SIDE_P(BL_PER_SIDE_P)) u_bldec (
    .en (dec_en), .mode (dec_mode), .col_sel (dec_col), .prog_data (dec_cells),
    .bl_in_en, .bl_prog
  );

  rram_array #(
    .ROWS_P(ROWS_P), .GROUPS_P(GROUPS_P), .BL_PER_SIDE_P(BL_PER_SIDE_P),
    .VAR_SIGMA_MILLI_P(VAR_SIGMA_MILLI_P)
  ) u_array (
    .clk, .prog_en, .wl, .bl_prog, .sense, .bl_in_en, .cur_pos, .cur_neg
  );

  for (genvar g = 0; g < int'(GROUPS_P); g++) begin : g_sa
    tmcsa #(.CUR_W(CUR_W), .NONIDEAL(NONIDEAL), .MARGIN_ADD(SA_MARGIN_ADD), .SEED(16'hACE1 ^ 16'(g * 16'h1F35))) u_sa (
      .clk, .rst_n, .sa_en,
      .cur_pos (cur_pos[g]), .cur_neg (cur_neg[g]),
      .out (sa_out[g]), .resolved (sa_resolved[g])
    );
  end

endmodule
