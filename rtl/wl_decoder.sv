// wl_decoder: word-line decoder of the IRC macro.
//
// In compute mode it drives the input feature onto the word-lines: rows
// 0..BIAS_ROWS-1 hold the extra bias and always see input 1, the next
// CONV_ROWS rows see the binary input feature (feat[i] on WL[BIAS_ROWS+i]),
// and the rows above stay off. All of them are raised together, so a whole
// convolution is accumulated in one operation, as the published design
// requires. In program mode it raises only the addressed row (one-hot), so the
// bit-line drivers can form cells on that row. With en low every word-line is
// off. Purely combinational; the analog WL driver that sets the low 0.44 V
// word-line level follows it outside the logic. The one-hot program mode is
// this design's choice: the paper names the decoder without describing it.
module wl_decoder
  import irc_pkg::*;
#(
  parameter int unsigned ROWS_P      = ROWS,
  parameter int unsigned BIAS_ROWS_P = BIAS_ROWS,
  parameter int unsigned CONV_ROWS_P = CONV_ROWS,
  localparam int unsigned AW         = $clog2(ROWS_P)
) (
  input  logic                   en,
  input  mode_t                  mode,
  input  logic [AW-1:0]          row_addr,   // program mode
  input  logic [CONV_ROWS_P-1:0] feat,       // compute mode
  output logic [ROWS_P-1:0]      wl
);

  initial assert (BIAS_ROWS_P + CONV_ROWS_P <= ROWS_P)
    else $error("wl_decoder: bias and kernel rows exceed the array");

  always_comb begin
    wl = '0;
    if (en) begin
      if (mode == MODE_PROGRAM) begin
        wl[row_addr] = 1'b1;
      end else begin
        wl[BIAS_ROWS_P-1:0]                       = '1;
        wl[BIAS_ROWS_P +: CONV_ROWS_P]            = feat;
      end
    end
  end

endmodule
