// irc_ctrl: digital control unit of the IRC macro (driver and SA sequencing).
//
// Accepts one request at a time on a valid/ready handshake and sequences the
// decoders, the array and the sense amplifiers:
//   PROGRAM (req_op = MODE_PROGRAM): one cycle P_FORM with the word-line and
//     bit-line decoders in program mode and prog_en high; the cells of row
//     req_row selected by req_cells are formed. 2 cycles from acceptance to
//     req_ready again.
//   COMPUTE (req_op = MODE_COMPUTE): C_SENSE raises the input feature on all
//     word-lines together with column req_col on every group and pulses sense
//     (array counts are taken at the end of this cycle); C_LATCH pulses sa_en
//     (SA decisions at the end of that cycle); C_DONE presents rsp_act and
//     rsp_resolved for one cycle with rsp_valid. Acceptance to rsp_valid is
//     3 cycles; a new request is accepted in the cycle after C_DONE.
// Request fields are captured at acceptance, so the requester may change them
// afterwards. rsp_act and rsp_resolved are the sense amplifiers' latched
// outputs passed straight through: the latches hold them until the next
// sa_en, and rsp_valid marks the cycle in which they belong to this request.
// rst_n is active low and synchronous.
// The published design names a digital control unit, a driver controller and
// an SA controller but gives no sequencing, cycle counts or handshake; all of
// that is this design's own choice. Its power-reduction and other SA
// controller functions (abbreviated PWRC and FM there) are not described and
// are not modelled.
module irc_ctrl
  import irc_pkg::*;
#(
  parameter int unsigned ROWS_P        = ROWS,
  parameter int unsigned CONV_ROWS_P   = CONV_ROWS,
  parameter int unsigned GROUPS_P      = GROUPS,
  parameter int unsigned BL_PER_SIDE_P = BL_PER_SIDE,
  localparam int unsigned AW           = $clog2(ROWS_P),
  localparam int unsigned CW           = (BL_PER_SIDE_P > 1) ? $clog2(BL_PER_SIDE_P) : 1,
  localparam int unsigned NBL          = 2 * GROUPS_P * BL_PER_SIDE_P
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // request
  input  logic                   req_valid,
  output logic                   req_ready,
  input  mode_t                  req_op,
  input  logic [AW-1:0]          req_row,
  input  logic [NBL-1:0]         req_cells,   // program: cells to form on req_row
  input  logic [CW-1:0]          req_col,
  input  logic [CONV_ROWS_P-1:0] req_feat,
  // response
  output logic                   rsp_valid,
  output logic [GROUPS_P-1:0]    rsp_act,
  output logic [GROUPS_P-1:0]    rsp_resolved,
  // decoders
  output logic                   dec_en,
  output mode_t                  dec_mode,
  output logic [AW-1:0]          dec_row,
  output logic [NBL-1:0]         dec_cells,
  output logic [CW-1:0]          dec_col,
  output logic [CONV_ROWS_P-1:0] dec_feat,
  // array and sense amplifiers
  output logic                   prog_en,
  output logic                   sense,
  output logic                   sa_en,
  input  logic [GROUPS_P-1:0]    sa_out,
  input  logic [GROUPS_P-1:0]    sa_resolved
);

  typedef enum logic [2:0] {S_IDLE, S_P_FORM, S_C_SENSE, S_C_LATCH, S_C_DONE} state_t;

  state_t                   state;
  mode_t                    op_q;
  logic [AW-1:0]            row_q;
  logic [NBL-1:0]           cells_q;
  logic [CW-1:0]            col_q;
  logic [CONV_ROWS_P-1:0]   feat_q;

  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op_q    <= MODE_COMPUTE;
      row_q   <= '0;
      cells_q <= '0;
      col_q   <= '0;
      feat_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          op_q    <= req_op;
          row_q   <= req_row;
          cells_q <= req_cells;
          col_q   <= req_col;
          feat_q  <= req_feat;
          state   <= (req_op == MODE_PROGRAM) ? S_P_FORM : S_C_SENSE;
        end
        S_P_FORM:  state <= S_IDLE;
        S_C_SENSE: state <= S_C_LATCH;
        S_C_LATCH: state <= S_C_DONE;
        S_C_DONE:  state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    dec_en    = (state == S_P_FORM) || (state == S_C_SENSE);
    dec_mode  = op_q;
    dec_row   = row_q;
    dec_cells = cells_q;
    dec_col   = col_q;
    dec_feat  = feat_q;
    prog_en   = (state == S_P_FORM);
    sense     = (state == S_C_SENSE);
    sa_en     = (state == S_C_LATCH);
    rsp_valid = (state == S_C_DONE);
    rsp_act      = sa_out;
    rsp_resolved = sa_resolved;
  end

  a_one_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({prog_en, sense, sa_en, rsp_valid}));
  a_rsp_after_latch: assert property (@(posedge clk) disable iff (!rst_n)
                                      sa_en |=> rsp_valid);

endmodule
