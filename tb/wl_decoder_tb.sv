// wl_decoder_tb: self-checking test of the word-line decoder at full size
// (1024 rows, 32 bias rows, 540 kernel rows). Checks compute mode (bias rows
// on, kernel rows follow the feature, upper rows off), program mode (exactly
// the addressed row on) and the disabled state.
module wl_decoder_tb;
  import irc_pkg::*;

  logic                 en;
  mode_t                mode;
  logic [9:0]           row_addr;
  logic [CONV_ROWS-1:0] feat;
  logic [ROWS-1:0]      wl;
  int checks = 0, failures = 0;

  wl_decoder dut (.en, .mode, .row_addr, .feat, .wl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input string what);
    for (int r = 0; r < int'(ROWS); r++) begin
      logic e;
      if (!en)                       e = 1'b0;
      else if (mode == MODE_PROGRAM) e = (r == int'(row_addr));
      else if (r < 32)               e = 1'b1;
      else if (r < 572)              e = feat[r-32];
      else                           e = 1'b0;
      checks++;
      if (wl[r] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL %s row %0d got %b", what, r, wl[r]);
      end
    end
  endtask

  initial begin
    for (int t = 0; t < 100; t++) begin
      en       = (t % 10) != 9;
      mode     = (t % 3 == 0) ? MODE_PROGRAM : MODE_COMPUTE;
      row_addr = 10'($urandom_range(0, 1023));
      for (int i = 0; i < int'(CONV_ROWS); i += 32) feat[i +: 28] = 28'($urandom);
      for (int i = 28; i < int'(CONV_ROWS); i += 32) feat[i +: 4] = 4'($urandom);
      #1;
      check_all($sformatf("t%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
