// gconv_layer_tb: runs slices of two consecutive binary group-convolution
// layers of the detector on full-size IRC macros, both layers stored in the
// same macro. Four macros see the same requests: one ideal (no variation,
// ideal comparator) and three as built with sense-amplifier limits, at the
// published point (sigma 0.42) and at two points of the published tolerance
// study (sigma 0.44; required margin 3 cells wider).
//
// Workload (all layers 3 x 3 kernels over one convolution group of 60 input
// channels, ternary weights drawn 20 % / 60 % / 20 % for -1 / 0 / +1):
//  * layer A, the size of a GConv Block 128,128: 128 output channels with an
//    extra bias of -12..+12 cells, on a random 8 x 8 binary input map;
//    channel o in group o % 64, column o / 64 (columns 0, 1);
//  * layer B, the size of a GConv Block 128,256 / 256,256: 256 output
//    channels with an extra bias of -12..+12, in columns 2..5; its input is
//    channels 0..59 of layer A's exact output after a 2 x 2 max-pool (4 x 4);
//  * layer A0: layer A's kernels again with no extra bias, in columns 6, 7,
//    to measure what the bias does to the sense-amplifier failures.
// Kernel inputs: element (ch, ky, kx) of a pixel's zero-padded 3 x 3 x 60
// window drives kernel row ch*9 + ky*3 + kx.
//
// The ideal macro must match sign(sum w*x + bias) > 0 exactly for every
// output. Each macro as built may differ from it only where it reports the
// output as unresolved or where the exact sum is within 16 cells of zero
// (about four standard deviations of the variation on a typical bit-line
// pair). The fractions of unresolved and of flipped outputs are printed per
// layer and macro; at most a quarter of each layer's outputs may be
// unresolved at the published point, at most 40 % at the tolerance points.
module gconv_layer_tb;
  import irc_pkg::*;

  localparam int CIN = 60, H = 8, W = 8, HB = H / 2, WB = W / 2;
  localparam int NA = 128, NB = 256, NK = NA + NB, NR = BIAS_ROWS + CONV_ROWS;

  logic                  clk = 0, rst_n = 0;
  localparam int NM = 3;  // macros as built
  logic                  req_valid = 0, rdy_i;
  logic [NM-1:0]         rdy_n, vld_n;
  mode_t                 req_op = MODE_COMPUTE;
  logic [9:0]            req_row = '0;
  logic [2*CHANNELS-1:0] req_weights = '0;
  logic [2:0]            req_col = '0;
  logic [CONV_ROWS-1:0]  req_feat = '0;
  logic                  vld_i;
  logic [GROUPS-1:0]     act_i, res_i;
  logic [GROUPS-1:0]     act_n [NM], res_n [NM];
  string                 mname [NM] = '{"sigma 0.42", "sigma 0.44", "margin +3"};

  irc_macro u_nonideal (.clk, .rst_n, .req_valid, .req_ready(rdy_n[0]), .req_op, .req_row, .req_weights,
                        .req_col, .req_feat, .rsp_valid(vld_n[0]), .rsp_act(act_n[0]), .rsp_resolved(res_n[0]));
  irc_macro #(.VAR_SIGMA_MILLI_P(440)) u_var44 (.clk, .rst_n, .req_valid, .req_ready(rdy_n[1]), .req_op, .req_row,
                        .req_weights, .req_col, .req_feat, .rsp_valid(vld_n[1]), .rsp_act(act_n[1]),
                        .rsp_resolved(res_n[1]));
  irc_macro #(.SA_MARGIN_ADD(3)) u_marg3 (.clk, .rst_n, .req_valid, .req_ready(rdy_n[2]), .req_op, .req_row,
                        .req_weights, .req_col, .req_feat, .rsp_valid(vld_n[2]), .rsp_act(act_n[2]),
                        .rsp_resolved(res_n[2]));
  irc_macro #(.NONIDEAL(1'b0), .VAR_SIGMA_MILLI_P(0)) u_ideal (.clk, .rst_n, .req_valid, .req_ready(rdy_i), .req_op, .req_row,
                        .req_weights, .req_col, .req_feat, .rsp_valid(vld_i), .rsp_act(act_i),
                        .rsp_resolved(res_i));

  always #5 clk = ~clk;

  bit  fmap_a [CIN][H][W];     // layer A input
  bit  out_a  [NA][H][W];      // exact layer A output
  bit  fmap_b [CIN][HB][WB];   // layer B input: pooled out_a, channels 0..59
  byte kw [NK][CIN][3][3];     // kernels: 0..NA-1 layer A, NA.. layer B
  int  kb [NK];
  int  checks = 0, failures = 0;
  // per layer: 0 = A, 1 = B, 2 = A0 (no bias)
  int  outputs [3], ones [3], unresolved [NM][3], flipped [NM][3];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Which kernel and which layer a column pair (col, group) holds.
  function automatic int slot_kernel(input int col, input int g);
    if (col < 2) return col * 64 + g;
    if (col < 6) return NA + (col - 2) * 64 + g;
    return (col - 6) * 64 + g;
  endfunction
  function automatic int slot_layer(input int col);
    return (col < 2) ? 0 : (col < 6) ? 1 : 2;
  endfunction
  function automatic int slot_bias(input int col, input int g);
    return (col < 6) ? kb[slot_kernel(col, g)] : 0;
  endfunction

  // Weight of kernel k with bias b on array row r.
  function automatic int row_weight(input int k, input int b, input int r);
    int i;
    if (r < int'(BIAS_ROWS)) begin
      if (b > 0 && r < b) return 1;
      if (b < 0 && r < -b) return -1;
      return 0;
    end
    i = r - BIAS_ROWS;
    return int'(kw[k][i / 9][(i % 9) / 3][i % 3]);
  endfunction

  task automatic send(input mode_t op, input int row, input logic [2*CHANNELS-1:0] wts,
                      input int col, input logic [CONV_ROWS-1:0] feat);
    @(negedge clk);
    while (!(&rdy_n && rdy_i)) @(negedge clk);
    req_valid = 1; req_op = op; req_row = 10'(row); req_weights = wts;
    req_col = 3'(col); req_feat = feat;
    @(negedge clk);
    req_valid = 0;
  endtask

  // One compute on column col with input feat; checks all 64 groups.
  task automatic run_col(input int col, input logic [CONV_ROWS-1:0] feat, input int y, input int x);
    int ly;
    ly = slot_layer(col);
    send(MODE_COMPUTE, 0, '0, col, feat);
    while (!vld_n[0]) @(negedge clk);
    checks++;
    if (!vld_i || !(&vld_n)) begin failures++; $display("FAIL macros out of step"); end
    for (int g = 0; g < 64; g++) begin
      int k, s;
      bit e;
      k = slot_kernel(col, g);
      s = slot_bias(col, g);
      for (int i = 0; i < CONV_ROWS; i++)
        if (feat[i]) s += int'(kw[k][i / 9][(i % 9) / 3][i % 3]);
      e = (s > 0);
      if (ly == 0) out_a[k][y][x] = e;
      outputs[ly]++;
      if (e) ones[ly]++;
      checks++;
      if (act_i[g] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL ideal col%0d g%0d y%0d x%0d: got %b sum %0d", col, g, y, x, act_i[g], s);
      end
      for (int m = 0; m < NM; m++)
        if (res_n[m][g]) begin
          if (act_n[m][g] !== e) flipped[m][ly]++;
          if (s > 16 || s < -16) begin
            checks++;
            if (act_n[m][g] !== e) begin
              failures++;
              if (failures < 10) $display("FAIL %s col%0d g%0d y%0d x%0d: got %b sum %0d", mname[m], col, g, y, x, act_n[m][g], s);
            end
          end
        end else unresolved[m][ly]++;
    end
  endtask

  function automatic void report(input string name, input int ly);
    $display("%s outputs=%0d ones=%0d", name, outputs[ly], ones[ly]);
    for (int m = 0; m < NM; m++)
      $display("    %-10s unresolved=%0d (%0d.%01d %%) resolved_but_flipped=%0d (%0d.%01d %%)", mname[m],
               unresolved[m][ly], unresolved[m][ly] * 100 / outputs[ly], (unresolved[m][ly] * 1000 / outputs[ly]) % 10,
               flipped[m][ly], flipped[m][ly] * 100 / outputs[ly], (flipped[m][ly] * 1000 / outputs[ly]) % 10);
  endfunction

  initial begin
    logic [2*CHANNELS-1:0] row_w;
    logic [CONV_ROWS-1:0]  feat;
    for (int ly = 0; ly < 3; ly++) begin
      outputs[ly] = 0; ones[ly] = 0;
      for (int m = 0; m < NM; m++) begin unresolved[m][ly] = 0; flipped[m][ly] = 0; end
    end
    for (int c = 0; c < CIN; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) fmap_a[c][y][x] = 1'($urandom);
    for (int k = 0; k < NK; k++) begin
      kb[k] = $urandom_range(0, 24) - 12;
      for (int c = 0; c < CIN; c++)
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) begin
            int u;
            u = $urandom_range(0, 99);
            kw[k][c][ky][kx] = (u < 20) ? -8'sd1 : (u < 80) ? 8'sd0 : 8'sd1;
          end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Program both layers and the unbiased copy, one word-line per request.
    for (int r = 0; r < NR; r++) begin
      row_w = '0;
      for (int col = 0; col < 8; col++)
        for (int g = 0; g < 64; g++) begin
          int wv, ch;
          wv = row_weight(slot_kernel(col, g), slot_bias(col, g), r);
          ch = g * 8 + col;
          row_w[2*ch +: 2] = (wv == 1) ? TW_POS : (wv == -1) ? TW_NEG : TW_ZERO;
        end
      send(MODE_PROGRAM, r, row_w, 0, '0);
    end

    // Layer A and its unbiased copy.
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        for (int c = 0; c < CIN; c++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int yy, xx;
              yy = y + ky - 1; xx = x + kx - 1;
              feat[c*9 + ky*3 + kx] = (yy >= 0 && yy < H && xx >= 0 && xx < W) ? fmap_a[c][yy][xx] : 1'b0;
            end
        run_col(0, feat, y, x);
        run_col(1, feat, y, x);
        run_col(6, feat, y, x);
        run_col(7, feat, y, x);
      end

    // 2 x 2 max-pool of the exact layer A output feeds layer B.
    for (int c = 0; c < CIN; c++)
      for (int y = 0; y < HB; y++)
        for (int x = 0; x < WB; x++)
          fmap_b[c][y][x] = out_a[c][2*y][2*x] | out_a[c][2*y][2*x+1] | out_a[c][2*y+1][2*x] | out_a[c][2*y+1][2*x+1];

    // Layer B.
    for (int y = 0; y < HB; y++)
      for (int x = 0; x < WB; x++) begin
        for (int c = 0; c < CIN; c++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++) begin
              int yy, xx;
              yy = y + ky - 1; xx = x + kx - 1;
              feat[c*9 + ky*3 + kx] = (yy >= 0 && yy < HB && xx >= 0 && xx < WB) ? fmap_b[c][yy][xx] : 1'b0;
            end
        for (int col = 2; col < 6; col++) run_col(col, feat, y, x);
      end

    report("layer A  (128 ch, extra bias)   ", 0);
    report("layer B  (256 ch, extra bias)   ", 1);
    report("layer A0 (128 ch, no extra bias)", 2);
    for (int m = 0; m < NM; m++)
      for (int ly = 0; ly < 3; ly++) begin
        checks++;
        if ((m == 0) ? (unresolved[m][ly] * 4 > outputs[ly]) : (unresolved[m][ly] * 10 > outputs[ly] * 4)) begin
          failures++; $display("FAIL %s: too many unresolved outputs in layer %0d", mname[m], ly);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
