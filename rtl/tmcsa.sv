// tmcsa: behavioural model of one group's binary current sense amplifier
// (triple-margin current-mode sense amplifier) with its input clamps.
//
// BEHAVIOURAL MODEL: the real part is an analog circuit. It turns the
// comparison of the positive and negative bit-line currents of a group into
// one binary activation: 1 when G+ carries more current than G-.
//
// Inputs are summed cell currents from rram_array in units of 1/32 of a
// nominal LRS cell (q = 32 per cell). With NONIDEAL = 0 the model is an
// ideal comparator: out = (cur_pos > cur_neg), resolved = 1.
// With NONIDEAL = 1 (default) it applies the published macro's limits:
//  * a summed current of p = q/32 cells becomes I = p * ratio(p) uA (ratio
//    taken at p rounded to whole cells), where ratio(p) is
//    the published two-piece fourth-order fit of bit-line nonlinearity
//    (split at p = 140), evaluated in 64-bit fixed point (ratio x 1e15,
//    current in nA); one LRS cell is one uA at ratio 1; the fit is
//    published for 0..540 cells, so above 540 the ratio is held at ratio(540);
//  * the larger current must lie in the sensing range I_MIN..I_MAX uA
//    (35..300 uA);
//  * the difference of the two inputs must reach the SA's required margin,
//    which grows with the larger input in whole cells; the margin is interpolated
//    linearly between points read off the published Monte-Carlo curve and
//    held constant below its first point and extended with its last slope
//    above its last point. MARGIN_ADD whole cells are added to it, to model
//    a sense amplifier with a larger spread (the published study sweeps
//    +1 .. +3 cells); the default 0 is the curve itself.
// If a condition fails the output is unresolved: out takes a pseudo-random
// bit from a 16-bit LFSR and resolved is 0, matching the paper's
// random-output treatment of unsensible bit-lines. Using a dead zone rather
// than a random offset is this model's simplification.
//
// Timing: out/resolved are registered on a clock edge with sa_en high and
// held otherwise. rst_n (active low, synchronous) clears them and reseeds the
// LFSR.
module tmcsa
  import irc_pkg::*;
#(
  parameter int unsigned CUR_W    = 21,
  parameter bit          NONIDEAL = 1'b1,
  parameter int unsigned I_MIN    = I_MIN_UA,
  parameter int unsigned I_MAX    = I_MAX_UA,
  parameter int unsigned MARGIN_ADD = 0,
  parameter logic [15:0] SEED     = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sa_en,
  input  logic [CUR_W-1:0] cur_pos,
  input  logic [CUR_W-1:0] cur_neg,
  output logic             out,
  output logic             resolved
);

  // Required margin in tenths of an LRS cell at 40, 60, 80, 100, 120 LRS;
  // interpolated values are rounded up to the next tenth.
  localparam int unsigned MX [5] = '{40, 60, 80, 100, 120};
  localparam int unsigned MY [5] = '{8, 12, 19, 30, 40};

  // ratio(p) scaled by 1e15, evaluated in 64-bit integers, p in whole cells.
  function automatic longint ratio_e15(input longint p_in);
    longint p;
    p = (p_in > 540) ? 64'sd540 : p_in;  // the fit covers 0..540 LRS cells
    if (p <= 140)
      return 64'sd10286000*p*p*p*p - 64'sd3790000000*p*p*p + 64'sd530000000000*p*p
             - 64'sd39200000000000*p + 64'sd2500000000000000;
    else
      return 64'sd18063*p*p*p*p - 64'sd32040000*p*p*p + 64'sd22495000000*p*p
             - 64'sd8057000000000*p + 64'sd1707000000000000;
  endfunction

  localparam longint G1 = longint'(GAIN_ONE);

  // Bit-line current in nA for a summed gain q (1/GAIN_ONE cell units):
  // q/GAIN_ONE cells x ratio(rounded cell count) x 1 uA.
  function automatic longint current_na(input longint q);
    longint p;
    p = (q + G1 / 2) / G1;
    return (q * (ratio_e15(p) / 64'sd1000000)) / (64'sd1000000 * G1);
  endfunction

  function automatic int unsigned margin10(input int unsigned n);
    if (n <= MX[0]) return MY[0];
    for (int i = 1; i < 5; i++)
      if (n <= MX[i]) return MY[i-1] + ((MY[i] - MY[i-1]) * (n - MX[i-1]) + MX[i] - MX[i-1] - 1) / (MX[i] - MX[i-1]);
    return MY[4] + ((MY[4] - MY[3]) * (n - MX[4]) + MX[4] - MX[3] - 1) / (MX[4] - MX[3]);
  endfunction

  logic [15:0] lfsr;
  logic        ok;
  logic        cmp;
  logic [31:0] np, nn, nmax, diff;
  logic signed [63:0] ip, in_, imax;

  always_comb begin
    np   = int'(cur_pos);
    nn   = int'(cur_neg);
    nmax = ((np > nn) ? np : nn) / GAIN_ONE;  // whole cells, for the margin curve
    diff = (np > nn) ? np - nn : nn - np;
    ip   = current_na(longint'(np));
    in_  = current_na(longint'(nn));
    imax = (ip > in_) ? ip : in_;
    if (NONIDEAL) begin
      cmp = (ip > in_);
      ok  = (imax >= 1000 * longint'(I_MIN)) && (imax <= 1000 * longint'(I_MAX)) && (diff * 10 >= (margin10(nmax) + 10 * MARGIN_ADD) * GAIN_ONE);
    end else begin
      cmp = (np > nn);
      ok  = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr     <= SEED;
      out      <= 1'b0;
      resolved <= 1'b0;
    end else if (sa_en) begin
      lfsr     <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      out      <= ok ? cmp : lfsr[0];
      resolved <= ok;
    end
  end

endmodule
