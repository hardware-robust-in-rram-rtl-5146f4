// irc_macro_tb: end-to-end test of the IRC macro at its default size
// (1024 x 1024 cells, 64 groups x 8 columns = 512 output channels, device
// variation sigma 0.42 and sensing limits on).
//
// Every channel gets a random ternary 3x3x60 kernel with the 20 % / 60 % /
// 20 % (-1 / 0 / +1) distribution and a random extra bias of -32..+32,
// written as |bias| cells of the bias sign on word-lines 0..31. The 572 rows
// are programmed through the request port (one row per request), then
// input features (dense, sparse and all-zero) are applied with every column
// select. After programming it checks that exactly the cells the ternary
// mapping calls for are LRS. For each of the 64 activations per operation it
// sums the (varied) gains of the activated LRS cells from the array's gain
// table, evaluates the current and margin limits in floating point, and
// checks resolved/out; cases within 1 % of a limit are skipped.
// It counts each mechanism: programming, compute with each column select,
// resolved outputs, outputs lost to the SA margin, outputs lost to too little
// current, and decisions the extra bias changed; one that never happens is a
// failure. The response latency (3 cycles) is checked on every operation.
// Finally one row is programmed again, with all-zero and then all-+1
// weights, to check through the request port that forming is one-time: no
// cell returns to HRS and formed cells keep their gain.
module irc_macro_tb;
  import irc_pkg::*;

  localparam int NCH = CHANNELS, NR = BIAS_ROWS + CONV_ROWS;

  logic                 clk = 0, rst_n = 0;
  logic                 req_valid = 0, req_ready;
  mode_t                req_op = MODE_COMPUTE;
  logic [9:0]           req_row = '0;
  logic [2*NCH-1:0]     req_weights = '0;
  logic [2:0]           req_col = '0;
  logic [CONV_ROWS-1:0] req_feat = '0;
  logic                 rsp_valid;
  logic [GROUPS-1:0]    rsp_act, rsp_resolved;

  irc_macro dut (.*);

  always #5 clk = ~clk;

  byte w [NCH][NR];   // -1, 0, +1
  int  bias [NCH];
  int  checks = 0, failures = 0, skipped = 0;
  int  n_prog = 0, n_comp = 0, n_res = 0, n_margin = 0, n_low = 0, n_bias_flip = 0;
  int  n_col [8];
  int  n_kept = 0, n_new = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ref_ratio(input real p);
    real q;
    q = (p > 540.0) ? 540.0 : p;
    if (q <= 140.0) return 1.0286e-8*q**4 - 3.79e-6*q**3 + 5.3e-4*q**2 - 3.92e-2*q + 2.5;
    return 1.8063e-11*q**4 - 3.204e-8*q**3 + 2.2495e-5*q**2 - 8.057e-3*q + 1.707;
  endfunction

  function automatic real ref_margin(input real n);
    real xs [5] = '{40.0, 60.0, 80.0, 100.0, 120.0};
    real ys [5] = '{0.8, 1.2, 1.9, 3.0, 4.0};
    if (n <= xs[0]) return ys[0];
    for (int i = 1; i < 5; i++)
      if (n <= xs[i]) return ys[i-1] + (ys[i] - ys[i-1]) * (n - xs[i-1]) / (xs[i] - xs[i-1]);
    return ys[4] + (ys[4] - ys[3]) * (n - xs[4]) / (xs[4] - xs[3]);
  endfunction

  task automatic send(input mode_t op, input int row, input logic [2*NCH-1:0] wts,
                      input int col, input logic [CONV_ROWS-1:0] feat);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_op = op; req_row = 10'(row); req_weights = wts;
    req_col = 3'(col); req_feat = feat;
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic compute(input int col, input logic [CONV_ROWS-1:0] feat);
    int lat;
    send(MODE_COMPUTE, 0, '0, col, feat);
    lat = 1;  // one cycle already passed since acceptance
    while (!rsp_valid && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL latency %0d", lat); end
    n_comp++;
    n_col[col]++;
    for (int g = 0; g < int'(GROUPS); g++) begin
      int  c, bp, bn, qp, qn, qpc, qnc;
      real ip, in_, imax, m, d;
      bit  ok, near;
      c  = g * 8 + col;
      bp = g * 16 + col;
      bn = g * 16 + 8 + col;
      qp = 0; qn = 0; qpc = 0; qnc = 0;
      for (int r = 0; r < NR; r++) begin
        bit on;
        on = (r < int'(BIAS_ROWS)) ? 1'b1 : feat[r - BIAS_ROWS];
        if (on && w[c][r] == 1)  qp += int'(dut.u_array.gain[bp][r]);
        if (on && w[c][r] == -1) qn += int'(dut.u_array.gain[bn][r]);
        if (on && r >= int'(BIAS_ROWS) && w[c][r] == 1)  qpc += int'(dut.u_array.gain[bp][r]);
        if (on && r >= int'(BIAS_ROWS) && w[c][r] == -1) qnc += int'(dut.u_array.gain[bn][r]);
      end
      ip  = qp / 32.0 * ref_ratio(real'((qp + 16) / 32));
      in_ = qn / 32.0 * ref_ratio(real'((qn + 16) / 32));
      imax = (ip > in_) ? ip : in_;
      d = ((qp > qn) ? qp - qn : qn - qp) / 32.0;
      m = $ceil(ref_margin(real'(((qp > qn) ? qp : qn) / 32)) * 10.0 - 1e-6) / 10.0;
      ok = imax >= 35.0 && imax <= 300.0 && d >= m;
      near = (imax > 34.6 && imax < 35.4) || (imax > 297.0 && imax < 303.0) ||
             (d > 0.99 * m && d < 1.01 * m);
      if (near) begin skipped++; continue; end
      checks++;
      if (rsp_resolved[g] !== ok || (ok && rsp_act[g] !== (qp > qn))) begin
        failures++;
        if (failures < 10)
          $display("FAIL col %0d group %0d: qp=%0d qn=%0d act=%b res=%b", col, g, qp, qn, rsp_act[g], rsp_resolved[g]);
      end
      if (ok) begin
        n_res++;
        if ((qpc > qnc) != (qp > qn)) n_bias_flip++;
      end else if (imax < 35.0) n_low++;
      else n_margin++;
    end
  endtask

  initial begin
    logic [2*NCH-1:0]     row_w;
    logic [CONV_ROWS-1:0] feat;
    // Kernels and biases.
    for (int c = 0; c < NCH; c++) begin
      bias[c] = (c % 17 == 0) ? 0 : $urandom_range(0, 64) - 32;
      for (int r = 0; r < int'(BIAS_ROWS); r++)
        w[c][r] = (r < ((bias[c] < 0) ? -bias[c] : bias[c])) ? byte'((bias[c] < 0) ? -1 : 1) : 8'sd0;
      for (int r = BIAS_ROWS; r < NR; r++) begin
        int u;
        u = $urandom_range(0, 99);
        w[c][r] = (u < 20) ? -8'sd1 : (u < 80) ? 8'sd0 : 8'sd1;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Program rows 0..571.
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < NCH; c++)
        row_w[2*c +: 2] = (w[c][r] == 1) ? TW_POS : (w[c][r] == -1) ? TW_NEG : TW_ZERO;
      send(MODE_PROGRAM, r, row_w, 0, '0);
      n_prog++;
    end
    repeat (2) @(negedge clk);  // let the last forming cycle complete
    // Every used cell is LRS exactly where the ternary weight says so.
    for (int c = 0; c < NCH; c++)
      for (int r = 0; r < NR; r++) begin
        int bp, bn;
        bp = (c / 8) * 16 + c % 8;
        bn = bp + 8;
        checks++;
        if ((dut.u_array.gain[bp][r] != 0) != (w[c][r] == 1) ||
            (dut.u_array.gain[bn][r] != 0) != (w[c][r] == -1)) begin
          failures++;
          if (failures < 10) $display("FAIL mapping channel %0d row %0d", c, r);
        end
      end
    // Inputs: 6 dense random, one sparse, one all-zero; every column.
    for (int f = 0; f < 8; f++) begin
      for (int i = 0; i < int'(CONV_ROWS); i++)
        feat[i] = (f < 6) ? 1'($urandom) : (f == 6) ? ($urandom_range(0, 9) == 0) : 1'b0;
      for (int col = 0; col < 8; col++) compute(col, feat);
    end
    // One-time forming: program row 40 again, first with all-zero weights
    // (nothing may change: writing 0 cannot erase), then with +1 on every
    // channel (formed cells keep their gain, unformed G+ cells get formed,
    // G- cells are untouched).
    begin
      logic [GAIN_W-1:0] snap [2*NCH];
      for (int b = 0; b < 2 * NCH; b++) snap[b] = dut.u_array.gain[b][40];
      send(MODE_PROGRAM, 40, '0, 0, '0);
      n_prog++;
      row_w = '0;
      for (int c = 0; c < NCH; c++) row_w[2*c +: 2] = TW_POS;
      send(MODE_PROGRAM, 40, row_w, 0, '0);
      n_prog++;
      repeat (2) @(negedge clk);
      for (int b = 0; b < 2 * NCH; b++) begin
        bit neg;
        neg = (b % 16) >= 8;
        checks++;
        if (snap[b] != 0) begin
          if (dut.u_array.gain[b][40] != snap[b]) begin failures++; $display("FAIL re-forming changed bit-line %0d", b); end
          else n_kept++;
        end else if (neg) begin
          if (dut.u_array.gain[b][40] != 0) begin failures++; $display("FAIL G- bit-line %0d formed", b); end
        end else begin
          if (dut.u_array.gain[b][40] == 0) begin failures++; $display("FAIL G+ bit-line %0d not formed", b); end
          else n_new++;
        end
      end
    end
    $display("one-time forming: cells kept=%0d newly formed=%0d", n_kept, n_new);
    checks++; if (n_kept == 0 || n_new == 0) begin failures++; $display("FAIL re-forming not exercised"); end
    $display("programmed rows=%0d computes=%0d resolved=%0d margin_lost=%0d low_current=%0d bias_changed=%0d skipped=%0d",
             n_prog, n_comp, n_res, n_margin, n_low, n_bias_flip, skipped);
    checks++; if (n_prog == 0)      begin failures++; $display("FAIL no programming"); end
    checks++; if (n_res == 0)       begin failures++; $display("FAIL nothing resolved"); end
    checks++; if (n_margin == 0)    begin failures++; $display("FAIL no margin loss seen"); end
    checks++; if (n_low == 0)       begin failures++; $display("FAIL no low-current case seen"); end
    checks++; if (n_bias_flip == 0) begin failures++; $display("FAIL bias never mattered"); end
    for (int col = 0; col < 8; col++) begin
      checks++; if (n_col[col] == 0) begin failures++; $display("FAIL column %0d unused", col); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
