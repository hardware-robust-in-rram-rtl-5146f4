// ternary_mapper_tb: self-checking test of the ternary weight to cell-pair
// mapping at full size (64 groups x 8 columns). Random weights, including the
// unused code 2'b11, are applied; every one of the 1024 cell bits is checked
// against a reference that decodes the bit index into group, side and column.
module ternary_mapper_tb;
  import irc_pkg::*;

  localparam int unsigned NCH = GROUPS * BL_PER_SIDE;
  localparam int unsigned NBL = 2 * NCH;

  logic [2*NCH-1:0] weights;
  logic [NBL-1:0]   cells;
  int checks = 0, failures = 0;

  ternary_mapper dut (.weights, .cells);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic expect_bit(input logic [2*NCH-1:0] w, input int b);
    int g, side, k, c;
    logic [1:0] code;
    g    = b / 16;
    side = (b % 16) / 8;
    k    = b % 8;
    c    = g * 8 + k;
    code = w[2*c +: 2];
    return side ? (code == 2'b10) : (code == 2'b01);
  endfunction

  initial begin
    int lrs_p, lrs_n;
    // Figure example column: +1, -1, 0, -1, +1, -1 on channel 0.
    logic [1:0] fig [6] = '{2'b01, 2'b10, 2'b00, 2'b10, 2'b01, 2'b10};
    logic [1:0] exp_gp [6] = '{1, 0, 0, 0, 1, 0};
    logic [1:0] exp_gn [6] = '{0, 1, 0, 1, 0, 1};
    for (int i = 0; i < 6; i++) begin
      weights = '0;
      weights[1:0] = fig[i];
      #1;
      checks++;
      if (cells[0] !== exp_gp[i][0] || cells[8] !== exp_gn[i][0] || $countones(cells) != int'(exp_gp[i][0] | exp_gn[i][0])) begin
        failures++;
        $display("FAIL figure row %0d: gp=%b gn=%b", i, cells[0], cells[8]);
      end
    end
    for (int t = 0; t < 200; t++) begin
      for (int c = 0; c < int'(NCH); c++) weights[2*c +: 2] = 2'($urandom_range(0, 3));
      #1;
      lrs_p = 0;
      lrs_n = 0;
      for (int b = 0; b < int'(NBL); b++) begin
        checks++;
        if (cells[b] !== expect_bit(weights, b)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d bit %0d: got %b", t, b, cells[b]);
        end
      end
      // A cell pair is never LRS on both sides.
      for (int g = 0; g < int'(GROUPS); g++)
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (cells[g*16+k] && cells[g*16+8+k]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
