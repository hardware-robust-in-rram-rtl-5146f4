// rram_array_tb: self-checking test of the RRAM array model at a reduced size
// (64 rows, 4 groups, 4 columns per side). Two instances see the same
// stimulus: one with the published device variation (sigma 0.42), one with
// none.
//  * A fresh array is all HRS (zero current).
//  * Forming a random pattern row by row: exactly the selected cells become
//    LRS; without variation each carries exactly one unit (32).
//  * Forming is one-time: a second pass keeps every formed cell's gain and
//    never clears a cell.
//  * The drawn gains are log-normal: mean of ln(gain) near 0 and standard
//    deviation near 0.42 (checked within 0.05).
//  * Random sensing (several BL_IN_EN per side included) gives, per group and
//    side, the sum of the gains of LRS cells on raised word-lines on enabled
//    bit-lines; outputs hold while sense is low. The reference sums the
//    gain table read from the model, independently of its adder loop.
module rram_array_tb;
  import irc_pkg::*;

  localparam int unsigned R = 64, G = 4, K = 4, NBL = 2 * G * K;
  localparam int unsigned CUR_W = $clog2(R * K * 255 + 1);

  logic                     clk = 0;
  logic                     prog_en = 0, sense = 0;
  logic [R-1:0]             wl = '0;
  logic [NBL-1:0]           bl_prog = '0, bl_in_en = '0;
  logic [G-1:0][CUR_W-1:0]  cur_pos, cur_neg, cur0_pos, cur0_neg;
  bit                       formed [NBL][R];
  int                       snap [NBL][R];
  int checks = 0, failures = 0;

  rram_array #(.ROWS_P(R), .GROUPS_P(G), .BL_PER_SIDE_P(K)) dut (
    .clk, .prog_en, .wl, .bl_prog, .sense, .bl_in_en, .cur_pos, .cur_neg);
  rram_array #(.ROWS_P(R), .GROUPS_P(G), .BL_PER_SIDE_P(K), .VAR_SIGMA_MILLI_P(0)) dut0 (
    .clk, .prog_en, .wl, .bl_prog, .sense, .bl_in_en, .cur_pos(cur0_pos), .cur_neg(cur0_neg));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic form_row(input int r, input logic [NBL-1:0] pat);
    @(negedge clk);
    wl = '0; wl[r] = 1'b1; bl_prog = pat; prog_en = 1'b1;
    @(negedge clk);
    prog_en = 1'b0; wl = '0; bl_prog = '0;
    for (int b = 0; b < int'(NBL); b++) if (pat[b]) formed[b][r] = 1;
  endtask

  task automatic check_cells(input string what);
    for (int b = 0; b < int'(NBL); b++)
      for (int r = 0; r < int'(R); r++) begin
        checks++;
        if ((dut.gain[b][r] != 0) != formed[b][r] ||
            int'(dut0.gain[b][r]) != (formed[b][r] ? 32 : 0)) begin
          failures++;
          if (failures < 10) $display("FAIL %s cell b%0d r%0d: %0d / %0d", what, b, r, dut.gain[b][r], dut0.gain[b][r]);
        end
      end
  endtask

  task automatic sense_check(input logic [R-1:0] w, input logic [NBL-1:0] en, input string what);
    int ep, en_c, ep0, en0;
    @(negedge clk);
    wl = w; bl_in_en = en; sense = 1'b1;
    @(negedge clk);
    sense = 1'b0; wl = '0; bl_in_en = '0;
    for (int g = 0; g < int'(G); g++) begin
      ep = 0; en_c = 0; ep0 = 0; en0 = 0;
      for (int b = g * 2 * K; b < int'((g + 1) * 2 * K); b++)
        for (int r = 0; r < int'(R); r++)
          if (w[r] && en[b] && formed[b][r]) begin
            if (b < int'(g * 2 * K + K)) begin ep += int'(dut.gain[b][r]); ep0 += 32; end
            else begin en_c += int'(dut.gain[b][r]); en0 += 32; end
          end
      checks++;
      if (int'(cur_pos[g]) != ep || int'(cur_neg[g]) != en_c ||
          int'(cur0_pos[g]) != ep0 || int'(cur0_neg[g]) != en0) begin
        failures++;
        if (failures < 10) $display("FAIL %s g%0d: pos %0d/%0d neg %0d/%0d", what, g, cur_pos[g], ep, cur_neg[g], en_c);
      end
    end
  endtask

  initial begin
    logic [NBL-1:0] pat, en;
    logic [R-1:0]   w;
    real s1, s2, mean, sd;
    int  n;
    for (int b = 0; b < int'(NBL); b++)
      for (int r = 0; r < int'(R); r++) formed[b][r] = 0;
    sense_check('1, '1, "fresh");
    check_cells("fresh");
    for (int r = 0; r < int'(R); r++) begin
      pat = NBL'($urandom);  // about 50 % LRS
      form_row(r, pat);
    end
    check_cells("formed");
    for (int b = 0; b < int'(NBL); b++)
      for (int r = 0; r < int'(R); r++) snap[b][r] = int'(dut.gain[b][r]);
    // Second pass: re-forming must neither clear nor redraw a cell.
    for (int r = 0; r < int'(R); r += 3) form_row(r, NBL'($urandom));
    check_cells("reformed");
    for (int b = 0; b < int'(NBL); b++)
      for (int r = 0; r < int'(R); r++)
        if (snap[b][r] != 0) begin
          checks++;
          if (int'(dut.gain[b][r]) != snap[b][r]) begin
            failures++;
            if (failures < 10) $display("FAIL gain of b%0d r%0d changed %0d -> %0d", b, r, snap[b][r], dut.gain[b][r]);
          end
        end
    // Log-normal statistics of the drawn gains.
    s1 = 0; s2 = 0; n = 0;
    for (int b = 0; b < int'(NBL); b++)
      for (int r = 0; r < int'(R); r++)
        if (formed[b][r]) begin
          real l;
          l = $ln(real'(dut.gain[b][r]) / 32.0);
          s1 += l; s2 += l * l; n++;
        end
    mean = s1 / n;
    sd = $sqrt(s2 / n - mean * mean);
    $display("formed cells %0d: mean ln(gain) %f, sd %f", n, mean, sd);
    checks++;
    if (mean > 0.05 || mean < -0.05 || sd < 0.37 || sd > 0.47) begin failures++; $display("FAIL gain statistics"); end
    for (int k = 0; k < int'(K); k++) begin
      en = '0;
      for (int g = 0; g < int'(G); g++) begin en[g*2*K+k] = 1; en[g*2*K+K+k] = 1; end
      sense_check('1, en, $sformatf("col%0d", k));
    end
    for (int t = 0; t < 300; t++) begin
      w  = {$urandom, $urandom};
      en = NBL'($urandom);
      sense_check(w, en, $sformatf("rand%0d", t));
    end
    begin
      logic [G-1:0][CUR_W-1:0] hold_p;
      hold_p = cur_pos;
      @(negedge clk); wl = '1; bl_in_en = '1;
      @(negedge clk); @(negedge clk);
      checks++;
      if (cur_pos !== hold_p) begin failures++; $display("FAIL outputs changed without sense"); end
      wl = '0; bl_in_en = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
